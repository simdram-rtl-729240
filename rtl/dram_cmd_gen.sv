// dram_cmd_gen: memory-controller command generator for SIMDRAM.
//
// Turns one row-level request at a time into timed DRAM commands on a
// single-bank command bus:
//   REQ_AAP : ACT row_a, (tRAS) ACT row_b, (tRAS) PRE, (tRP)
//             row_a's contents, or the majority of a reserved triple, end up
//             in row_b as well (row copy).
//   REQ_AP  : ACT row_a, (tRAS) PRE, (tRP)
//             in-place majority when row_a names a reserved triple.
//   REQ_WR  : ACT row_a, (tRCD) WR col, (max(tWR, tRAS-tRCD)) PRE, (tRP)
//   REQ_RD  : ACT row_a, (tRCD) RD col, (max(tRTP, tRAS-tRCD)) PRE, (tRP)
// The AAP/AP command pairs are the in-DRAM operations of the paper; the
// timing between them (a full tRAS before the second ACT and before PRE) and
// the DDR4-2400 defaults below are this design's assumptions, since the
// paper gives no DRAM timing.
//
// Interface: valid/ready request port (req_ready only in the idle state once
// tRP has elapsed), registered command output cmd_o (one command per cycle,
// CMD_NOP otherwise), idle_o high when no request is in flight.
// Timing: a request is accepted in the cycle req_valid && req_ready; its ACT
// appears on cmd_o in the next cycle. An AAP takes 2*tRAS+tRP cycles from
// accept to the next accept, an AP tRAS+tRP.
module dram_cmd_gen
  import simdram_pkg::*;
#(
  parameter int unsigned T_RCD = 17,  // ACT -> RD/WR
  parameter int unsigned T_RAS = 39,  // ACT -> ACT (AAP) and ACT -> PRE
  parameter int unsigned T_RP  = 17,  // PRE -> ACT
  parameter int unsigned T_WR  = 18,  // WR  -> PRE
  parameter int unsigned T_RTP = 9    // RD  -> PRE
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  dram_req_t req,
  output dram_cmd_t cmd_o,
  output logic      idle_o
);

  localparam int unsigned RAS_AFTER_COL = (T_RAS > T_RCD) ? T_RAS - T_RCD : 1;
  localparam int unsigned WR_TO_PRE = (T_WR  > RAS_AFTER_COL) ? T_WR  : RAS_AFTER_COL;
  localparam int unsigned RD_TO_PRE = (T_RTP > RAS_AFTER_COL) ? T_RTP : RAS_AFTER_COL;

  typedef enum logic [1:0] {S_IDLE, S_ACT2, S_COL, S_PRE} state_e;

  state_e      state_q;
  logic [7:0]  cnt_q;
  dram_req_t   cur_q;
  dram_cmd_t   cmd_d;

  assign req_ready = (state_q == S_IDLE) && (cnt_q == '0);
  assign idle_o    = (state_q == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      cur_q   <= '0;
      cmd_o   <= '0;
    end else begin
      cmd_o <= cmd_d;
      unique case (state_q)
        S_IDLE: begin
          if (cnt_q != '0) begin
            cnt_q <= cnt_q - 8'd1;
          end else if (req_valid) begin
            cur_q <= req;
            unique case (req.kind)
              REQ_AAP: begin state_q <= S_ACT2; cnt_q <= 8'(T_RAS - 1); end
              REQ_AP:  begin state_q <= S_PRE;  cnt_q <= 8'(T_RAS - 1); end
              default: begin state_q <= S_COL;  cnt_q <= 8'(T_RCD - 1); end
            endcase
          end
        end
        S_ACT2: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 8'd1;
          else begin state_q <= S_PRE; cnt_q <= 8'(T_RAS - 1); end
        end
        S_COL: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 8'd1;
          else begin
            state_q <= S_PRE;
            cnt_q   <= (cur_q.kind == REQ_WR) ? 8'(WR_TO_PRE - 1) : 8'(RD_TO_PRE - 1);
          end
        end
        S_PRE: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 8'd1;
          else begin state_q <= S_IDLE; cnt_q <= 8'(T_RP - 1); end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Command issued in this cycle (registered onto cmd_o).
  always_comb begin
    cmd_d = '0;
    cmd_d.cmd = CMD_NOP;
    unique case (state_q)
      S_IDLE: if (cnt_q == '0 && req_valid) begin
        cmd_d.cmd = CMD_ACT;
        cmd_d.row = req.row_a;
      end
      S_ACT2: if (cnt_q == '0) begin
        cmd_d.cmd = CMD_ACT;
        cmd_d.row = cur_q.row_b;
      end
      S_COL: if (cnt_q == '0) begin
        cmd_d.cmd   = (cur_q.kind == REQ_WR) ? CMD_WR : CMD_RD;
        cmd_d.row   = cur_q.row_a;
        cmd_d.col   = cur_q.col;
        cmd_d.wdata = cur_q.wdata;
      end
      S_PRE: if (cnt_q == '0) cmd_d.cmd = CMD_PRE;
      default: ;
    endcase
  end

  // A request must stay unchanged while it waits to be accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (req_valid && !req_ready) |=> (req_valid && $stable(req));
  endproperty
  a_req_stable: assert property (p_req_stable)
    else $error("dram_cmd_gen: request changed before it was accepted");

endmodule
