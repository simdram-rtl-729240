// transposition_unit: converts between the horizontal layout the CPU uses and
// the vertical layout SIMDRAM computes on, so both can coexist in DRAM.
//
// Horizontal -> vertical (start_wr): the unit accepts N elements from the
// host (one per cycle on the hin_* valid/ready port), then writes bit-plane b
// (bit b of all N elements, element e in bit e) as one N-bit word to row
// base_row+b, word col, for b = 0 .. nbits-1. N elements thus occupy N
// adjacent lanes (bitlines) of nbits rows.
// Vertical -> horizontal (start_rd): the unit reads the nbits words back
// from rows base_row.. at word col, gathers them as bit-planes and returns
// the N elements, zero-extended above bit nbits-1, on the hout_* port.
//
// The paper gives the function (layout conversion in the memory controller,
// in both directions). The buffer organisation, the group of N = 64 elements
// per DRAM word and the one-request-per-bit-plane sequencing are this
// design's choices. Column requests open a single row, so the request's
// second row field (row_b) is always zero here.
//
// Timing: start_* is accepted when busy_o is low. done_o pulses for one cycle
// when the last write request has been accepted by the command generator
// (write) or the last element has been taken by the host (read). Read data
// return on rd_valid/rd_data in request order, any number of cycles after
// their requests.
module transposition_unit
  import simdram_pkg::*;
#(
  parameter int unsigned N = DQ_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // command from the instruction front end
  input  logic               start_wr,
  input  logic               start_rd,
  input  row_t               base_row,
  input  col_t               col,
  input  logic [NBITS_W-1:0] nbits,
  output logic               busy_o,
  output logic               done_o,
  // host element streams
  input  logic               hin_valid,
  output logic               hin_ready,
  input  logic [N-1:0]       hin_data,
  output logic               hout_valid,
  input  logic               hout_ready,
  output logic [N-1:0]       hout_data,
  // row-level requests to the command generator
  output logic               req_valid,
  input  logic               req_ready,
  output dram_req_t          req,
  // read data from DRAM
  input  logic               rd_valid,
  input  dq_t                rd_data
);

  localparam int unsigned IW = $clog2(N);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_WRITE, S_READ, S_DRAIN} state_e;

  state_e             state_q;
  logic [IW:0]        elem_q;     // element counter (fill / drain)
  logic [NBITS_W-1:0] plane_q;    // bit-planes requested
  logic [NBITS_W-1:0] resp_q;     // bit-planes returned (read)
  row_t               base_q;
  col_t               col_q;
  logic [NBITS_W-1:0] nbits_q;

  logic         tb_clr, tb_row_we, tb_col_we;
  logic [IW-1:0] tb_row_idx, tb_col_idx;
  logic [N-1:0] tb_row_rdata, tb_col_rdata;
  logic [N-1:0] elem_mask;

  transpose_buffer #(.N(N)) u_buf (
    .clk       (clk),
    .clr       (tb_clr),
    .row_we    (tb_row_we),
    .row_idx   (tb_row_idx),
    .row_wdata (hin_data),
    .col_we    (tb_col_we),
    .col_idx   (tb_col_idx),
    .col_wdata (rd_data[N-1:0]),
    .row_rdata (tb_row_rdata),
    .col_rdata (tb_col_rdata)
  );

  assign busy_o     = (state_q != S_IDLE);
  assign hin_ready  = (state_q == S_FILL);
  assign hout_valid = (state_q == S_DRAIN);

  always_comb begin
    for (int b = 0; b < N; b++) elem_mask[b] = (b < int'(nbits_q));
  end
  assign hout_data = tb_row_rdata & elem_mask;

  assign tb_clr     = (state_q == S_IDLE) && start_rd;
  assign tb_row_we  = hin_valid && hin_ready;
  assign tb_row_idx = elem_q[IW-1:0];
  assign tb_col_we  = (state_q == S_READ) && rd_valid;
  assign tb_col_idx = (state_q == S_READ) ? resp_q[IW-1:0] : plane_q[IW-1:0];

  always_comb begin
    req       = '0;
    req_valid = 1'b0;
    req.row_a = base_q + row_t'(plane_q);
    req.col   = col_q;
    req.wdata = dq_t'(tb_col_rdata);
    if (state_q == S_WRITE) begin
      req_valid = 1'b1;
      req.kind  = REQ_WR;
    end else if (state_q == S_READ && plane_q < nbits_q) begin
      req_valid = 1'b1;
      req.kind  = REQ_RD;
    end else begin
      req.kind  = REQ_AP;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      elem_q  <= '0;
      plane_q <= '0;
      resp_q  <= '0;
      base_q  <= '0;
      col_q   <= '0;
      nbits_q <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          elem_q  <= '0;
          plane_q <= '0;
          resp_q  <= '0;
          if (start_wr || start_rd) begin
            base_q  <= base_row;
            col_q   <= col;
            nbits_q <= nbits;
            state_q <= start_wr ? S_FILL : S_READ;
          end
        end
        S_FILL: if (hin_valid) begin
          elem_q <= elem_q + 1'b1;
          if (elem_q == (IW+1)'(N - 1)) state_q <= S_WRITE;
        end
        S_WRITE: if (req_ready) begin
          plane_q <= plane_q + 1'b1;
          if (plane_q == nbits_q - 1'b1) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end
        end
        S_READ: begin
          if (req_valid && req_ready) plane_q <= plane_q + 1'b1;
          if (rd_valid) begin
            resp_q <= resp_q + 1'b1;
            if (resp_q == nbits_q - 1'b1) begin
              state_q <= S_DRAIN;
              elem_q  <= '0;
            end
          end
        end
        S_DRAIN: if (hout_ready) begin
          elem_q <= elem_q + 1'b1;
          if (elem_q == (IW+1)'(N - 1)) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (start_wr || start_rd) |-> (state_q == S_IDLE))
    else $error("transposition_unit: start while busy");
  a_one_start: assert property (@(posedge clk) disable iff (!rst_n)
      !(start_wr && start_rd))
    else $error("transposition_unit: both directions started at once");

endmodule
