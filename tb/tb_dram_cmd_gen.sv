// tb_dram_cmd_gen: self-checking test of the DRAM command generator. Random
// AAP, AP, WR and RD requests are offered with random idle gaps; for each
// accepted request the test predicts the exact command cycles (ACT one cycle
// after acceptance, the second ACT of an AAP and the PRE tRAS later, WR/RD
// tRCD after ACT, PRE after max(tWR or tRTP, tRAS - tRCD)) and compares the
// whole command bus cycle by cycle, NOPs included. It also checks that a
// request held valid is accepted exactly when tRP after the previous PRE has
// passed, and nothing sooner.
module tb_dram_cmd_gen;
  import simdram_pkg::*;

  localparam int T_RCD = 17, T_RAS = 39, T_RP = 17, T_WR = 18, T_RTP = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      req_valid = 1'b0, req_ready, idle;
  dram_req_t req = '0;
  dram_cmd_t cmd;

  dram_cmd_gen dut (.clk, .rst_n, .req_valid, .req_ready, .req, .cmd_o(cmd), .idle_o(idle));

  int checks = 0, failures = 0;
  longint cyc = 0;

  typedef struct { longint t; dram_cmd_e c; row_t row; col_t col; dq_t d; } exp_t;
  exp_t expq[$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // Cycle-by-cycle comparison of the command bus.
  always @(posedge clk) begin
    exp_t e;
    cyc++;
    if (rst_n) begin
      if (expq.size() > 0 && expq[0].t == cyc) begin
        e = expq.pop_front();
        check(cmd.cmd == e.c && (e.c == CMD_PRE || cmd.row == e.row) &&
              ((e.c != CMD_WR && e.c != CMD_RD) || cmd.col == e.col) &&
              (e.c != CMD_WR || cmd.wdata == e.d),
              $sformatf("expected %s row %0d, got %s row %0d", e.c.name(), e.row,
                        cmd.cmd.name(), cmd.row));
      end else if (cmd.cmd != CMD_NOP) begin
        check(1'b0, $sformatf("unexpected %s", cmd.cmd.name()));
      end
    end
  end

  function automatic int duration(input req_kind_e k);
    int ras_after = T_RAS - T_RCD;
    unique case (k)
      REQ_AAP: return 2 * T_RAS + T_RP;
      REQ_AP:  return T_RAS + T_RP;
      REQ_WR:  return T_RCD + ((T_WR > ras_after) ? T_WR : ras_after) + T_RP;
      default: return T_RCD + ((T_RTP > ras_after) ? T_RTP : ras_after) + T_RP;
    endcase
  endfunction

  initial begin
    longint t_acc, t_prev_acc;
    int prev_dur, ras_after;
    bit back_to_back;
    ras_after = T_RAS - T_RCD;
    t_prev_acc = -1000; prev_dur = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      back_to_back = ($urandom_range(0, 1) == 1);
      if (!back_to_back) repeat ($urandom_range(1, 120)) @(negedge clk);
      req_valid = 1'b1;
      req.kind  = req_kind_e'($urandom_range(0, 3));
      req.row_a = row_t'($urandom);
      req.row_b = row_t'($urandom);
      req.col   = col_t'($urandom);
      req.wdata = {$urandom, $urandom};
      while (!req_ready) @(negedge clk);
      t_acc = cyc + 1;  // accepted at the coming rising edge
      @(negedge clk);
      // earliest legal acceptance
      check(t_acc >= t_prev_acc + prev_dur, "request accepted before tRP elapsed");
      if (back_to_back)
        check(t_acc == t_prev_acc + prev_dur,
              $sformatf("back-to-back request accepted at +%0d, expected +%0d",
                        t_acc - t_prev_acc, prev_dur));
      expq.push_back('{t_acc + 1, CMD_ACT, req.row_a, '0, '0});
      unique case (req.kind)
        REQ_AAP: begin
          expq.push_back('{t_acc + 1 + T_RAS, CMD_ACT, req.row_b, '0, '0});
          expq.push_back('{t_acc + 1 + 2 * T_RAS, CMD_PRE, '0, '0, '0});
        end
        REQ_AP: expq.push_back('{t_acc + 1 + T_RAS, CMD_PRE, '0, '0, '0});
        REQ_WR: begin
          expq.push_back('{t_acc + 1 + T_RCD, CMD_WR, req.row_a, req.col, req.wdata});
          expq.push_back('{t_acc + 1 + T_RCD + ((T_WR > ras_after) ? T_WR : ras_after),
                           CMD_PRE, '0, '0, '0});
        end
        default: begin
          expq.push_back('{t_acc + 1 + T_RCD, CMD_RD, req.row_a, req.col, '0});
          expq.push_back('{t_acc + 1 + T_RCD + ((T_RTP > ras_after) ? T_RTP : ras_after),
                           CMD_PRE, '0, '0, '0});
        end
      endcase
      t_prev_acc = t_acc;
      prev_dur = duration(req.kind);
      req_valid = 1'b0;
      req = '0;
    end
    repeat (200) @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d expected commands never issued", expq.size()));
    check(idle, "generator idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
