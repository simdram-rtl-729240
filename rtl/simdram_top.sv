// simdram_top: the SIMDRAM logic of a memory controller. It receives the
// SIMDRAM ISA instructions and horizontal data from the host and drives the
// command bus of a DRAM whose subarrays support in-DRAM row copy, majority
// (triple-row activation) and NOT (dual-contact cells). The DRAM itself is
// outside this module: its command bus and read-data return are ports.
//
// Blocks: bbop_decoder (instruction queue and dispatch) -> control_unit
// (uProgram replay for an operation) or transposition_unit (horizontal <->
// vertical layout) -> dram_cmd_gen (ACT/PRE/RD/WR with DRAM timing).
// Instructions run one at a time, so the control unit and the transposition
// unit never request at once; the request port of whichever is busy drives
// the command generator (a plain multiplexer, the arbitration policy being
// this design's choice).
//
// Interface: inst_* valid/ready instruction port; hin_* / hout_* valid/ready
// element streams for transposition (64 elements per instruction); dram_cmd
// one registered DRAM command per cycle; dram_rd_valid/dram_rd_data read data
// in request order; retired counts completed instructions.
module simdram_top
  import simdram_pkg::*;
#(
  parameter int unsigned QDEPTH = 8,
  parameter int unsigned T_RCD  = 17,
  parameter int unsigned T_RAS  = 39,
  parameter int unsigned T_RP   = 17,
  parameter int unsigned T_WR   = 18,
  parameter int unsigned T_RTP  = 9
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  output logic        inst_ready,
  input  bbop_inst_t  inst,
  input  logic        hin_valid,
  output logic        hin_ready,
  input  dq_t         hin_data,
  output logic        hout_valid,
  input  logic        hout_ready,
  output dq_t         hout_data,
  output dram_cmd_t   dram_cmd,
  input  logic        dram_rd_valid,
  input  dq_t         dram_rd_data,
  output logic        busy,
  output logic [31:0] retired
);

  logic               uprog_we, optab_we;
  logic [UPC_W-1:0]   uprog_addr, optab_addr;
  uop_t               uprog_wdata;
  logic [OPID_W-1:0]  optab_idx, cu_op_id;
  logic               cu_start, cu_done, cu_busy;
  logic [NBITS_W-1:0] cu_nbits, tu_nbits;
  row_t [N_OPND-1:0]  cu_base;
  logic               tu_start_wr, tu_start_rd, tu_done, tu_busy;
  row_t               tu_base;
  col_t               tu_col;
  logic               gen_idle;

  logic      cu_req_valid, tu_req_valid, gen_req_valid, gen_req_ready;
  dram_req_t cu_req, tu_req, gen_req;

  bbop_decoder #(.QDEPTH(QDEPTH)) u_dec (
    .clk, .rst_n, .inst_valid, .inst_ready, .inst,
    .uprog_we, .uprog_addr, .uprog_wdata, .optab_we, .optab_idx, .optab_addr,
    .cu_start, .cu_op_id, .cu_nbits, .cu_base, .cu_done,
    .tu_start_wr, .tu_start_rd, .tu_base, .tu_col, .tu_nbits, .tu_done,
    .gen_idle, .busy_o(busy), .retired_o(retired)
  );

  control_unit u_cu (
    .clk, .rst_n,
    .uprog_we, .uprog_addr, .uprog_wdata, .optab_we, .optab_idx, .optab_addr,
    .start(cu_start), .op_id(cu_op_id), .nbits(cu_nbits), .base(cu_base),
    .busy_o(cu_busy), .done_o(cu_done),
    .req_valid(cu_req_valid), .req_ready(gen_req_ready && !tu_busy), .req(cu_req)
  );

  transposition_unit u_tu (
    .clk, .rst_n,
    .start_wr(tu_start_wr), .start_rd(tu_start_rd), .base_row(tu_base),
    .col(tu_col), .nbits(tu_nbits), .busy_o(tu_busy), .done_o(tu_done),
    .hin_valid, .hin_ready, .hin_data, .hout_valid, .hout_ready, .hout_data,
    .req_valid(tu_req_valid), .req_ready(gen_req_ready && tu_busy), .req(tu_req),
    .rd_valid(dram_rd_valid), .rd_data(dram_rd_data)
  );

  always_comb begin
    if (tu_busy) begin
      gen_req_valid = tu_req_valid;
      gen_req       = tu_req;
    end else begin
      gen_req_valid = cu_req_valid;
      gen_req       = cu_req;
    end
  end

  dram_cmd_gen #(
    .T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP), .T_WR(T_WR), .T_RTP(T_RTP)
  ) u_gen (
    .clk, .rst_n,
    .req_valid(gen_req_valid), .req_ready(gen_req_ready), .req(gen_req),
    .cmd_o(dram_cmd), .idle_o(gen_idle)
  );

  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n) !(cu_busy && tu_busy))
    else $error("simdram_top: control unit and transposition unit active together");

endmodule
