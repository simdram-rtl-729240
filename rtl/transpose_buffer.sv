// transpose_buffer: square bit matrix that is written and read either by
// rows (one horizontal element per access) or by columns (one bit-plane per
// access). Writing elements and reading bit-planes transposes horizontal
// data into the vertical layout; writing bit-planes and reading elements
// transposes back. Entry e holds element e; bit b of all entries together
// form bit-plane b, whose bit e belongs to lane e.
//
// Interface: synchronous writes (row write has priority over a column write
// to the same cycle; clr clears the whole matrix), combinational reads of the
// row at row_idx and of the column at col_idx.
// This is the storage core of the transposition unit; the square N x N shape
// (N = data bus width) is this design's choice.
module transpose_buffer #(
  parameter int unsigned N = 64
) (
  input  logic                 clk,
  input  logic                 clr,
  input  logic                 row_we,
  input  logic [$clog2(N)-1:0] row_idx,
  input  logic [N-1:0]         row_wdata,
  input  logic                 col_we,
  input  logic [$clog2(N)-1:0] col_idx,
  input  logic [N-1:0]         col_wdata,
  output logic [N-1:0]         row_rdata,
  output logic [N-1:0]         col_rdata
);

  logic [N-1:0] mat_q [N];

  always_ff @(posedge clk) begin
    for (int e = 0; e < N; e++) begin
      if (clr) begin
        mat_q[e] <= '0;
      end else if (row_we && row_idx == e[$clog2(N)-1:0]) begin
        mat_q[e] <= row_wdata;
      end else if (col_we) begin
        mat_q[e][col_idx] <= col_wdata[e];
      end
    end
  end

  assign row_rdata = mat_q[row_idx];

  always_comb begin
    for (int e = 0; e < N; e++) col_rdata[e] = mat_q[e][col_idx];
  end

endmodule
