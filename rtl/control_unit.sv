// control_unit: the SIMDRAM control unit in the memory controller. For an
// operation requested by the host it replays that operation's uProgram, the
// sequence of DRAM row activations that computes the operation bit-serially
// on vertically stored operands, without host involvement.
//
// How it works. A uProgram is a list of uOps in a writable uProgram memory;
// an operation table maps an operation number to the address of its first
// uOp, so new operations are added by writing both memories, without hardware
// changes. Each uOp is one of
//   AAP src,dst : ACTIVATE src, ACTIVATE dst, PRECHARGE (row copy; with a
//                 reserved triple as src, MAJ written to dst as well)
//   AP  src     : ACTIVATE src, PRECHARGE (in-place MAJ of a reserved triple)
//   LOOP target : i = i + 1; jump to target while i < n, else i = 0
//   LOOPJ target: the same with the outer counter j (nested bit loops, as
//                 multiplication needs: for each bit j, for each bit i)
//   DONE        : end of the operation.
// A row operand is given relative to the instruction's operand base rows, so
// one uProgram serves any operand placement and any element width n:
// absolute (reserved compute/constant rows), base+imm, base+i+imm (bit i of
// a vertical operand), base+(n-1)-imm (counted from the most significant
// bit), base+j+imm, base+i+j+imm, base+n+j+imm and base+(n-1)-j+imm (the
// outer loop walking from the top bit down, as division needs). The per-bit body plus
// LOOP is how bit-serial operations repeat over the n bits of an element;
// offsetting a row index is also how a shift is expressed without moving
// data.
// The paper gives the unit's function (issue the activation sequence of each
// operation, transparently to the user) and that operations are programmable.
// The uOp encoding, the operation table, the two loop counters and the
// addressing modes are this design's choices. The request's col and wdata
// fields are constant zero here: row operations need no column.
//
// Interface: uprog_we/optab_we write the two memories (one entry per cycle,
// only while idle). start with op_id, nbits and the four operand base rows
// launches an operation when busy_o is low; done_o pulses when its DONE uOp
// is reached (the last request has then been accepted). Requests leave on a
// valid/ready port towards the DRAM command generator.
// Timing: each uOp is fetched in one cycle (synchronous memory read) and
// executes in the cycle its request is accepted; LOOP and DONE take one cycle
// after the fetch.
module control_unit
  import simdram_pkg::*;
#(
  parameter int unsigned UPROG_DEPTH = 1 << UPC_W,  // uOps
  parameter int unsigned N_OPS       = 1 << OPID_W  // operation table entries
) (
  input  logic               clk,
  input  logic               rst_n,
  // memory programming
  input  logic               uprog_we,
  input  logic [UPC_W-1:0]   uprog_addr,
  input  uop_t               uprog_wdata,
  input  logic               optab_we,
  input  logic [OPID_W-1:0]  optab_idx,
  input  logic [UPC_W-1:0]   optab_addr,
  // operation launch
  input  logic               start,
  input  logic [OPID_W-1:0]  op_id,
  input  logic [NBITS_W-1:0] nbits,
  input  row_t [N_OPND-1:0]  base,
  output logic               busy_o,
  output logic               done_o,
  // requests to the command generator
  output logic               req_valid,
  input  logic               req_ready,
  output dram_req_t          req
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_EXEC} state_e;

  uop_t              uprog_mem [UPROG_DEPTH];
  logic [UPC_W-1:0]  optab_mem [N_OPS];

  state_e             state_q;
  logic [UPC_W-1:0]   upc_q;
  uop_t               uop_q;
  logic [NBITS_W-1:0] i_q;
  logic [NBITS_W-1:0] j_q;
  logic [NBITS_W-1:0] n_q;
  row_t [N_OPND-1:0]  base_q;

  function automatic row_t resolve(input uaddr_t a, input row_t [N_OPND-1:0] b,
                                   input logic [NBITS_W-1:0] i,
                                   input logic [NBITS_W-1:0] j,
                                   input logic [NBITS_W-1:0] n);
    unique case (a.mode)
      AM_ABS:  return a.imm;
      AM_BASE: return b[a.opnd] + a.imm;
      AM_BIT:  return b[a.opnd] + row_t'(i) + a.imm;
      AM_MSB:  return b[a.opnd] + row_t'(n) - row_t'(1) - a.imm;
      AM_J:    return b[a.opnd] + row_t'(j) + a.imm;
      AM_IJ:   return b[a.opnd] + row_t'(i) + row_t'(j) + a.imm;
      AM_NJ:   return b[a.opnd] + row_t'(n) + row_t'(j) + a.imm;
      default: return b[a.opnd] + row_t'(n) - row_t'(1) - row_t'(j) + a.imm;
    endcase
  endfunction

  // uProgram and operation-table memories (synchronous read)
  always_ff @(posedge clk) begin
    if (uprog_we) uprog_mem[uprog_addr] <= uprog_wdata;
    if (optab_we) optab_mem[optab_idx]  <= optab_addr;
  end

  always_ff @(posedge clk) begin
    if (state_q == S_FETCH) uop_q <= uprog_mem[upc_q];
  end

  assign busy_o = (state_q != S_IDLE);

  always_comb begin
    req       = '0;
    req_valid = 1'b0;
    req.row_a = resolve(uop_q.src, base_q, i_q, j_q, n_q);
    req.row_b = resolve(uop_q.dst, base_q, i_q, j_q, n_q);
    req.kind  = (uop_q.kind == UOP_AP) ? REQ_AP : REQ_AAP;
    if (state_q == S_EXEC && (uop_q.kind == UOP_AAP || uop_q.kind == UOP_AP))
      req_valid = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      upc_q   <= '0;
      i_q     <= '0;
      j_q     <= '0;
      n_q     <= '0;
      base_q  <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          upc_q   <= optab_mem[op_id];
          i_q     <= '0;
          j_q     <= '0;
          n_q     <= nbits;
          base_q  <= base;
          state_q <= S_FETCH;
        end
        S_FETCH: state_q <= S_EXEC;
        S_EXEC: begin
          unique case (uop_q.kind)
            UOP_AAP, UOP_AP: if (req_ready) begin
              upc_q   <= upc_q + 1'b1;
              state_q <= S_FETCH;
            end
            UOP_LOOP: begin
              if (i_q + 1'b1 < n_q) begin
                i_q   <= i_q + 1'b1;
                upc_q <= uop_q.src.imm[UPC_W-1:0];
              end else begin
                i_q   <= '0;
                upc_q <= upc_q + 1'b1;
              end
              state_q <= S_FETCH;
            end
            UOP_LOOPJ: begin
              if (j_q + 1'b1 < n_q) begin
                j_q   <= j_q + 1'b1;
                upc_q <= uop_q.src.imm[UPC_W-1:0];
              end else begin
                j_q   <= '0;
                upc_q <= upc_q + 1'b1;
              end
              state_q <= S_FETCH;
            end
            default: begin  // UOP_DONE
              state_q <= S_IDLE;
              done_o  <= 1'b1;
            end
          endcase
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      (uprog_we || optab_we) |-> (state_q == S_IDLE))
    else $error("control_unit: uProgram memory written during an operation");
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (state_q == S_IDLE))
    else $error("control_unit: start while busy");

endmodule
