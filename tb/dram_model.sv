// dram_model: behavioural model of one DRAM bank whose subarray supports the
// in-DRAM operations SIMDRAM relies on. Not synthesizable logic: it stands in
// for the DRAM chip in simulation.
//
// Rows 0..15 are the reserved compute addresses (designated rows T0..T3 and
// the dual-contact rows DCC0/DCC1, addressed alone, through their negated
// wordline, in pairs or in triples), rows 16/17 hold constant 0 and 1, the
// rest are data rows. Behaviour per command:
//   ACT on a precharged bank : the addressed row(s) are sensed. One row gives
//       its value (complemented through a negated wordline); a triple gives
//       the bitwise majority, which is also written back into all three.
//   ACT on an open bank      : the addressed row(s) are overwritten with the
//       value held in the sense amplifiers (complemented through a negated
//       wordline) - this is the row copy of an AAP.
//   WR / RD                  : one 64-bit word of the open row(s).
//   PRE                      : closes the bank.
// Timing rules (tRAS, tRP, tRCD) and protocol errors are counted in
// `errors`; the mechanisms are counted in n_tra (majority), n_copy (row copy)
// and n_not (write through a negated wordline). Read data return RL cycles
// after RD. Only N_ROWS rows and N_WORDS words per row are stored.
module dram_model
  import simdram_pkg::*;
#(
  parameter int unsigned N_ROWS  = 512,
  parameter int unsigned N_WORDS = 2,
  parameter int unsigned RL      = 4,
  parameter int unsigned T_RCD   = 17,
  parameter int unsigned T_RAS   = 39,
  parameter int unsigned T_RP    = 17
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_cmd_t cmd,
  output logic      rd_valid,
  output dq_t       rd_data
);

  localparam int unsigned W = N_WORDS * DQ_W;

  logic [W-1:0] mem [N_ROWS];
  logic [W-1:0] sa;
  logic         open_q;
  row_t         open_row;
  longint       t_now, t_act, t_pre;
  int           errors, n_act, n_pre, n_tra, n_copy, n_not, n_wr, n_rd;
  logic         rv_pipe [RL];
  dq_t          rd_pipe [RL];

  // Row group of an address: up to three physical rows and their polarity.
  function automatic int decode(input row_t r, output int rows[3], output bit neg[3]);
    neg = '{0, 0, 0};
    rows = '{0, 0, 0};
    unique case (r)
      16'd5:  begin rows[0] = 4; neg[0] = 1; return 1; end
      16'd7:  begin rows[0] = 6; neg[0] = 1; return 1; end
      16'd8:  begin rows = '{4, 0, 0}; neg[0] = 1; return 2; end
      16'd9:  begin rows = '{6, 1, 0}; neg[0] = 1; return 2; end
      16'd10: begin rows = '{2, 3, 0}; return 2; end
      16'd11: begin rows = '{0, 3, 0}; return 2; end
      16'd12: begin rows = '{0, 1, 2}; return 3; end
      16'd13: begin rows = '{1, 2, 3}; return 3; end
      16'd14: begin rows = '{4, 1, 2}; return 3; end
      16'd15: begin rows = '{6, 0, 3}; return 3; end
      default: begin rows[0] = int'(r); return 1; end
    endcase
  endfunction

  task automatic write_group(input row_t r, input logic [W-1:0] v);
    int rows[3]; bit neg[3]; int k;
    k = decode(r, rows, neg);
    for (int j = 0; j < k; j++) begin
      if (rows[j] >= int'(N_ROWS)) begin errors++; continue; end
      if (rows[j] == int'(ROW_C0) || rows[j] == int'(ROW_C1)) errors++;
      mem[rows[j]] = neg[j] ? ~v : v;
      if (neg[j]) n_not++;
    end
  endtask

  initial begin
    errors = 0; n_act = 0; n_pre = 0; n_tra = 0; n_copy = 0; n_not = 0;
    n_wr = 0; n_rd = 0; t_now = 0; t_act = -1000; t_pre = -1000;
    open_q = 1'b0;
    open_row = '0;
    sa = '0;
    for (int r = 0; r < int'(N_ROWS); r++) mem[r] = '0;
    mem[ROW_C1] = '1;
    for (int i = 0; i < int'(RL); i++) begin rv_pipe[i] = 1'b0; rd_pipe[i] = '0; end
  end

  assign rd_valid = rv_pipe[RL-1];
  assign rd_data  = rd_pipe[RL-1];

  always @(posedge clk) begin
    int rows[3]; bit neg[3]; int k;
    logic [W-1:0] v[3];
    t_now++;
    for (int i = int'(RL) - 1; i > 0; i--) begin
      rv_pipe[i] <= rv_pipe[i-1];
      rd_pipe[i] <= rd_pipe[i-1];
    end
    rv_pipe[0] <= 1'b0;
    if (rst_n) begin
      unique case (cmd.cmd)
        CMD_ACT: begin
          n_act++;
          if (!open_q) begin
            if (t_now - t_pre < longint'(T_RP)) errors++;
            k = decode(cmd.row, rows, neg);
            for (int j = 0; j < k; j++) begin
              if (rows[j] >= int'(N_ROWS)) begin errors++; v[j] = '0; end
              else v[j] = neg[j] ? ~mem[rows[j]] : mem[rows[j]];
            end
            if (k == 1) sa = v[0];
            else if (k == 3) begin
              sa = (v[0] & v[1]) | (v[1] & v[2]) | (v[0] & v[2]);
              n_tra++;
              write_group(cmd.row, sa);
            end else begin
              errors++;  // a row pair cannot be the source of a copy
              sa = v[0];
            end
            open_q = 1'b1;
            open_row = cmd.row;
          end else begin
            if (t_now - t_act < longint'(T_RAS)) errors++;
            n_copy++;
            write_group(cmd.row, sa);
          end
          t_act = t_now;
        end
        CMD_PRE: begin
          n_pre++;
          if (!open_q || t_now - t_act < longint'(T_RAS)) errors++;
          open_q = 1'b0;
          t_pre = t_now;
        end
        CMD_WR: begin
          n_wr++;
          if (!open_q || t_now - t_act < longint'(T_RCD) || int'(cmd.col) >= int'(N_WORDS)) errors++;
          else begin
            sa[cmd.col*DQ_W +: DQ_W] = cmd.wdata;
            write_group(open_row, sa);
          end
        end
        CMD_RD: begin
          n_rd++;
          if (!open_q || t_now - t_act < longint'(T_RCD) || int'(cmd.col) >= int'(N_WORDS)) errors++;
          rv_pipe[0] <= 1'b1;
          rd_pipe[0] <= (int'(cmd.col) < int'(N_WORDS)) ? sa[cmd.col*DQ_W +: DQ_W] : '0;
        end
        default: ;
      endcase
    end
  end

endmodule
