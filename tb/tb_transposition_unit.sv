// tb_transposition_unit: self-checking test of the transposition unit with
// the DRAM command generator and the behavioural DRAM model.
//  * horizontal -> vertical: 64 random elements are streamed in (with random
//    gaps in hin_valid); afterwards row base+b, word col of the DRAM must hold
//    bit b of element e in bit e, for every b < n, and rows base+n.. must be
//    untouched. Exactly n WR commands must have been issued.
//  * vertical -> horizontal: random bit-planes are placed in DRAM directly;
//    the 64 elements returned (with random hout_ready stalls) must be the
//    bits gathered across the planes, zero above bit n-1. Exactly n RD
//    commands must have been issued.
//  * a write followed by a read of the same rows returns the original data.
module tb_transposition_unit;
  import simdram_pkg::*;

  localparam int T_RCD = 3, T_RAS = 5, T_RP = 3;
  localparam int NW = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               start_wr = 0, start_rd = 0, busy, done;
  row_t               base_row = '0;
  col_t               col = '0;
  logic [NBITS_W-1:0] nbits = '0;
  logic               hin_valid = 0, hin_ready, hout_valid, hout_ready = 0;
  dq_t                hin_data = '0, hout_data;
  logic               req_valid, req_ready, rd_valid, gen_idle;
  dram_req_t          req;
  dram_cmd_t          cmd;
  dq_t                rd_data;

  transposition_unit dut (
    .clk, .rst_n, .start_wr, .start_rd, .base_row, .col, .nbits, .busy_o(busy),
    .done_o(done), .hin_valid, .hin_ready, .hin_data, .hout_valid, .hout_ready,
    .hout_data, .req_valid, .req_ready, .req, .rd_valid, .rd_data
  );
  dram_cmd_gen #(.T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP), .T_WR(3), .T_RTP(2)) gen (
    .clk, .rst_n, .req_valid, .req_ready, .req, .cmd_o(cmd), .idle_o(gen_idle)
  );
  dram_model #(.N_ROWS(256), .N_WORDS(NW), .RL(6), .T_RCD(T_RCD), .T_RAS(T_RAS),
               .T_RP(T_RP)) dram (
    .clk, .rst_n, .cmd, .rd_valid, .rd_data
  );

  int checks = 0, failures = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic dq_t mask(input int n);
    return (n >= 64) ? '1 : ((64'd1 << n) - 1);
  endfunction

  task automatic do_write(input int b0, input int c, input int n, input dq_t el[64]);
    int wr0 = dram.n_wr;
    @(negedge clk);
    base_row = row_t'(b0); col = col_t'(c); nbits = NBITS_W'(n); start_wr = 1'b1;
    @(negedge clk) start_wr = 1'b0;
    for (int e = 0; e < 64; e++) begin
      while ($urandom_range(0, 3) == 0) begin hin_valid = 1'b0; @(negedge clk); end
      hin_valid = 1'b1; hin_data = el[e];
      while (!hin_ready) @(negedge clk);
      @(negedge clk);
    end
    hin_valid = 1'b0;
    while (!done) @(negedge clk);
    while (!gen_idle) @(negedge clk);
    repeat (4) @(negedge clk);
    check(dram.n_wr - wr0 == n, $sformatf("%0d WR commands for %0d bit-planes", dram.n_wr - wr0, n));
  endtask

  task automatic do_read(input int b0, input int c, input int n, output dq_t el[64]);
    int rd0 = dram.n_rd, e = 0;
    @(negedge clk);
    base_row = row_t'(b0); col = col_t'(c); nbits = NBITS_W'(n); start_rd = 1'b1;
    @(negedge clk) start_rd = 1'b0;
    while (e < 64) begin
      hout_ready = ($urandom_range(0, 3) != 0);
      if (hout_valid && hout_ready) begin el[e] = hout_data; e++; end
      @(negedge clk);
    end
    hout_ready = 1'b0;
    check(!busy, "unit idle after the last element");
    check(dram.n_rd - rd0 == n, $sformatf("%0d RD commands for %0d bit-planes", dram.n_rd - rd0, n));
  endtask

  initial begin
    dq_t el[64], back[64];
    int ns[4] = '{8, 1, 33, 64};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (ns[k]) begin
      automatic int n = ns[k], b0 = 40 + 70 * (k % 2), c = k % NW;
      automatic int bad = 0, bad_above = 0;
      logic [NW*DQ_W-1:0] above_before;
      for (int e = 0; e < 64; e++) el[e] = {$urandom, $urandom};
      above_before = dram.mem[b0 + n];
      do_write(b0, c, n, el);
      for (int b = 0; b < n; b++)
        for (int e = 0; e < 64; e++)
          if (dram.mem[b0 + b][c * 64 + e] != el[e][b]) bad++;
      check(bad == 0, $sformatf("n=%0d: %0d vertical bits wrong after transpose-write", n, bad));
      check(dram.mem[b0 + n] == above_before, "row above the operand untouched");
      // read back what was written
      do_read(b0, c, n, back);
      for (int e = 0; e < 64; e++) if (back[e] != (el[e] & mask(n))) bad_above++;
      check(bad_above == 0, $sformatf("n=%0d: %0d elements wrong on read-back", n, bad_above));
    end
    // read of data placed vertically by other means
    begin
      automatic int n = 12, b0 = 180, bad = 0;
      dq_t plane[12];
      for (int b = 0; b < n; b++) begin
        plane[b] = {$urandom, $urandom};
        dram.mem[b0 + b][2 * 64 +: 64] = plane[b];
      end
      do_read(b0, 2, n, back);
      for (int e = 0; e < 64; e++) begin
        automatic dq_t x = '0;
        for (int b = 0; b < n; b++) x[b] = plane[b][e];
        if (back[e] != x) bad++;
      end
      check(bad == 0, $sformatf("transpose-read of 12 planes: %0d elements wrong", bad));
    end
    check(dram.errors == 0, "no DRAM protocol or timing errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
