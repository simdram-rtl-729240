// bbop_decoder: front end for the SIMDRAM ISA extensions. The host issues
// instructions that (1) transpose data between the horizontal and vertical
// layouts and (2) name an operation for the control unit to run in DRAM;
// two further instructions load uProgram memory and the operation table so
// new operations can be installed without hardware changes.
//
// How it works. Instructions enter a FIFO (inst_ready low = queue full, the
// host stalls). The head is decoded one instruction at a time, in order:
//   BB_UPROG_WR, BB_OPTAB_WR : one-cycle write into the control unit memories
//   BB_TRSP_WR,  BB_TRSP_RD  : start the transposition unit, wait for its done
//   BB_EXEC                  : start the control unit, wait for its done
//   BB_NOP                   : retire
// A transpose or execute instruction retires only once the DRAM command
// generator is idle again, so a following instruction sees its results.
// retired_o counts retired instructions.
// The paper states that such ISA extensions exist and what they are for; the
// encoding, the in-order single-issue execution and the queue depth are this
// design's choices.
module bbop_decoder
  import simdram_pkg::*;
#(
  parameter int unsigned QDEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               inst_valid,
  output logic               inst_ready,
  input  bbop_inst_t         inst,
  // control unit
  output logic               uprog_we,
  output logic [UPC_W-1:0]   uprog_addr,
  output uop_t               uprog_wdata,
  output logic               optab_we,
  output logic [OPID_W-1:0]  optab_idx,
  output logic [UPC_W-1:0]   optab_addr,
  output logic               cu_start,
  output logic [OPID_W-1:0]  cu_op_id,
  output logic [NBITS_W-1:0] cu_nbits,
  output row_t [N_OPND-1:0]  cu_base,
  input  logic               cu_done,
  // transposition unit
  output logic               tu_start_wr,
  output logic               tu_start_rd,
  output row_t               tu_base,
  output col_t               tu_col,
  output logic [NBITS_W-1:0] tu_nbits,
  input  logic               tu_done,
  // command generator
  input  logic               gen_idle,
  // status
  output logic               busy_o,
  output logic [31:0]        retired_o
);

  typedef enum logic [1:0] {S_DISPATCH, S_WAIT_UNIT, S_WAIT_GEN} state_e;

  state_e     state_q;
  logic       head_valid, head_pop;
  bbop_inst_t head;
  logic [$bits(bbop_inst_t)-1:0] head_bits;

  sync_fifo #(.WIDTH($bits(bbop_inst_t)), .DEPTH(QDEPTH)) u_q (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (inst_valid),
    .in_ready  (inst_ready),
    .in_data   (inst),
    .out_valid (head_valid),
    .out_ready (head_pop),
    .out_data  (head_bits)
  );
  assign head = bbop_inst_t'(head_bits);

  logic dispatch;
  assign dispatch = (state_q == S_DISPATCH) && head_valid;
  assign head_pop = dispatch;

  assign uprog_we    = dispatch && head.op == BB_UPROG_WR;
  assign uprog_addr  = head.col[UPC_W-1:0];
  assign uprog_wdata = uop_t'(head.data);
  assign optab_we    = dispatch && head.op == BB_OPTAB_WR;
  assign optab_idx   = head.op_id;
  assign optab_addr  = head.col[UPC_W-1:0];
  assign cu_start    = dispatch && head.op == BB_EXEC;
  assign cu_op_id    = head.op_id;
  assign cu_nbits    = head.nbits;
  assign cu_base     = head.row;
  assign tu_start_wr = dispatch && head.op == BB_TRSP_WR;
  assign tu_start_rd = dispatch && head.op == BB_TRSP_RD;
  assign tu_base     = head.row[0];
  assign tu_col      = head.col;
  assign tu_nbits    = head.nbits;

  assign busy_o = head_valid || (state_q != S_DISPATCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_DISPATCH;
      retired_o <= '0;
    end else begin
      unique case (state_q)
        S_DISPATCH: if (dispatch) begin
          if (head.op inside {BB_TRSP_WR, BB_TRSP_RD, BB_EXEC}) state_q <= S_WAIT_UNIT;
          else retired_o <= retired_o + 1;
        end
        S_WAIT_UNIT: if (cu_done || tu_done) state_q <= S_WAIT_GEN;
        S_WAIT_GEN: if (gen_idle) begin
          state_q   <= S_DISPATCH;
          retired_o <= retired_o + 1;
        end
        default: state_q <= S_DISPATCH;
      endcase
    end
  end

endmodule
