// tb_simdram_top: end-to-end test of the SIMDRAM memory-controller logic at
// its default parameters (DDR4-2400 timings), attached to the behavioural
// DRAM model. Acting as the host, it
//   1. installs the uProgram library with uProgram/operation-table writes,
//   2. transposes two operand vectors A and B (128 lanes of 16-bit elements,
//      two DRAM words wide) into the vertical layout,
//   3. runs AND, OR, XOR, ADD, SUB, GT, RELU, a predicated select (ITE on
//      the GT result, giving max(A, B)), EQ, the 32-bit product MUL, the
//      3-input AND3(A, B, A+B) (third source: the ADD result rows) and
//      BITCOUNT(A), the 17-bit left shift SHL(A) and the quotient A / B
//      inside DRAM,
//   4. transposes every result back and compares it with values computed on
//      the elements directly.
// It also checks the cycle count of the ADD instruction against the uProgram's
// activation count and counts the mechanisms of the design: triple-row
// majority, row copy, NOT through a dual-contact cell, transposition in both
// directions, uProgram loop iterations, host stall on a full instruction
// queue and host back-pressure on the result stream. Each must occur.
module tb_simdram_top;
  import simdram_pkg::*;
  import simdram_uprog_pkg::*;

  localparam int NB    = 16;           // element width
  localparam int WORDS = 2;            // DRAM words per row used (64 lanes each)
  localparam int LANES = WORDS * DQ_W;
  localparam int RA = 32, RB = 64, RS = 660, RPRED = 640;
  localparam int T_RAS = 39, T_RP = 17;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        inst_valid = 0, inst_ready, hin_valid = 0, hin_ready;
  logic        hout_valid, hout_ready = 0, rd_valid, busy;
  bbop_inst_t  inst = '0;
  dq_t         hin_data = '0, hout_data, rd_data;
  dram_cmd_t   cmd;
  logic [31:0] retired;

  simdram_top dut (
    .clk, .rst_n, .inst_valid, .inst_ready, .inst, .hin_valid, .hin_ready, .hin_data,
    .hout_valid, .hout_ready, .hout_data, .dram_cmd(cmd), .dram_rd_valid(rd_valid),
    .dram_rd_data(rd_data), .busy, .retired
  );
  dram_model #(.N_ROWS(880), .N_WORDS(WORDS)) dram (
    .clk, .rst_n, .cmd, .rd_valid, .rd_data
  );

  int checks = 0, failures = 0;
  int n_queue_stall = 0, n_hout_stall = 0, n_loop = 0;
  longint cyc = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (dut.u_cu.state_q == dut.u_cu.S_EXEC && dut.u_cu.uop_q.kind inside {UOP_LOOP, UOP_LOOPJ}) n_loop++;
  end

  // ---------------- host data streams ----------------
  dq_t in_elems[$];           // elements for transpose-writes, in order
  dq_t out_elems[$];          // elements returned by transpose-reads

  initial begin : feeder
    forever begin
      @(negedge clk);
      while (in_elems.size() > 0) begin
        hin_valid = 1'b1;
        hin_data  = in_elems.pop_front();
        while (!hin_ready) @(negedge clk);   // transferred at the next rising edge
        @(negedge clk);
      end
      hin_valid = 1'b0;
    end
  end

  initial begin : collector
    forever begin
      @(negedge clk);
      hout_ready = ($urandom_range(0, 4) != 0);
      if (hout_valid && hout_ready) out_elems.push_back(hout_data);  // taken at the next edge
      if (hout_valid && !hout_ready) n_hout_stall++;
    end
  end

  // ---------------- instruction issue ----------------
  task automatic issue(input bbop_inst_t x);
    inst_valid = 1'b1; inst = x;
    while (!inst_ready) begin n_queue_stall++; @(negedge clk); end
    @(negedge clk);
    inst_valid = 1'b0;
  endtask

  function automatic bbop_inst_t mk(input bbop_e op, input int id, input int n,
                                    input int r0, input int r1, input int r2,
                                    input int r3, input int col);
    bbop_inst_t x = '0;
    x.op = op; x.op_id = OPID_W'(id); x.nbits = NBITS_W'(n);
    x.row[0] = row_t'(r0); x.row[1] = row_t'(r1); x.row[2] = row_t'(r2);
    x.row[3] = row_t'(r3); x.col = col_t'(col);
    return x;
  endfunction

  function automatic int dst_row(input op_e op);
    return 100 + 36 * int'(op);
  endfunction

  task automatic wait_idle();
    while (busy) @(negedge clk);
  endtask

  initial begin
    uop_t prog[$];
    int start_pc[N_LIB_OPS];
    longint unsigned a[LANES], b[LANES], pred[LANES], expv, got;
    op_e order[14] = '{OP_AND, OP_OR, OP_XOR, OP_ADD, OP_SUB, OP_GT, OP_RELU, OP_ITE, OP_EQ, OP_MUL,
                        OP_AND3, OP_BITCOUNT, OP_SHL, OP_DIV};
    int n_aap, n_ap;
    longint t0, t_add, exp_add;
    int tra0, copy0, not0;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1. install the uProgram library
    build_library(prog, start_pc);
    $display("uProgram library: %0d uOps, %0d operations", prog.size(), N_LIB_OPS);
    foreach (prog[k]) begin
      automatic bbop_inst_t x = mk(BB_UPROG_WR, 0, 0, 0, 0, 0, 0, k);
      x.data = prog[k];
      issue(x);
    end
    for (int o = 0; o < N_LIB_OPS; o++) issue(mk(BB_OPTAB_WR, o, 0, 0, 0, 0, 0, start_pc[o]));

    // 2. transpose A and B into DRAM
    for (int l = 0; l < LANES; l++) begin
      a[l] = {$urandom, $urandom} & ((64'd1 << NB) - 1);
      b[l] = {$urandom, $urandom} & ((64'd1 << NB) - 1);
      if (l % 9 == 0) b[l] = a[l];
      if (l % 5 == 0) b[l] = b[l] >> 9;    // small divisors
    end
    for (int w = 0; w < WORDS; w++) begin
      for (int e = 0; e < 64; e++) in_elems.push_back(a[w * 64 + e]);
      issue(mk(BB_TRSP_WR, 0, NB, RA, 0, 0, 0, w));
      for (int e = 0; e < 64; e++) in_elems.push_back(b[w * 64 + e]);
      issue(mk(BB_TRSP_WR, 0, NB, RB, 0, 0, 0, w));
    end
    wait_idle();
    check(retired == 32'(prog.size() + N_LIB_OPS + 2 * WORDS), "instructions retired after set-up");

    // 3. in-DRAM operations (ADD timed on its own)
    tra0 = dram.n_tra; copy0 = dram.n_copy; not0 = dram.n_not;
    foreach (order[k]) begin
      automatic op_e op = order[k];
      automatic int r3 = (op == OP_ITE) ? RPRED : (op == OP_AND3) ? dst_row(OP_ADD) : RS;
      wait_idle();
      t0 = cyc;
      issue(mk(BB_EXEC, int'(op), NB, dst_row(op), RA, RB, r3, 0));
      if (op == OP_GT) issue(mk(BB_EXEC, int'(OP_OR), 1, RPRED, dst_row(OP_GT), ROW_C0, 0, 0));
      if (op == OP_ADD) begin
        @(negedge clk);
        wait_idle();
        t_add = cyc - t0;
      end
    end
    wait_idle();
    check(dram.n_tra > tra0, "triple-row activations (MAJ) occurred");
    check(dram.n_copy > copy0, "row copies occurred");
    check(dram.n_not > not0, "NOT through a dual-contact cell occurred");
    count_requests(OP_ADD, NB, n_aap, n_ap);
    exp_add = longint'(n_aap) * (2 * T_RAS + T_RP) + longint'(n_ap) * (T_RAS + T_RP);
    $display("ADD of %0d-bit elements: %0d cycles (%0d AAP, %0d AP)", NB, t_add, n_aap, n_ap);
    check(t_add >= exp_add && t_add <= exp_add + 12,
          $sformatf("ADD instruction took %0d cycles, expected %0d..%0d", t_add, exp_add, exp_add + 12));

    // 4. transpose the results back and compare
    foreach (order[k]) begin
      automatic op_e op = order[k];
      automatic int nres = result_bits(op, NB);
      for (int w = 0; w < WORDS; w++) issue(mk(BB_TRSP_RD, 0, nres, dst_row(op), 0, 0, 0, w));
    end
    wait_idle();
    repeat (4) @(negedge clk);
    check(out_elems.size() == $size(order) * WORDS * 64, $sformatf("%0d result elements returned", out_elems.size()));
    for (int l = 0; l < LANES; l++) pred[l] = ((a[l] > b[l]) ? 1 : 0);
    foreach (order[k]) begin
      automatic op_e op = order[k];
      automatic int bad = 0;
      for (int w = 0; w < WORDS; w++) begin
        for (int e = 0; e < 64; e++) begin
          automatic int l = w * 64 + e;
          expv = ref_op(op, NB, a[l], b[l], pred[l][0], a[l] + b[l]);
          got = (out_elems.size() > 0) ? out_elems.pop_front() : '1;
          if (got != expv) begin
            bad++;
            if (bad < 3) $display("  %s lane %0d: a=%h b=%h got %h expected %h",
                                  op.name(), l, a[l], b[l], got, expv);
          end
        end
      end
      check(bad == 0, $sformatf("%s: %0d of %0d lanes wrong", op.name(), bad, LANES));
    end

    // mechanisms
    $display("MAJ=%0d copies=%0d NOT=%0d transposeWR=%0d transposeRD=%0d loops=%0d queue_stalls=%0d hout_stalls=%0d",
             dram.n_tra, dram.n_copy, dram.n_not, dram.n_wr, dram.n_rd, n_loop,
             n_queue_stall, n_hout_stall);
    check(dram.n_wr > 0, "transposition to vertical layout occurred");
    check(dram.n_rd > 0, "transposition to horizontal layout occurred");
    check(n_loop > 0, "uProgram loop iterations occurred");
    check(n_queue_stall > 0, "host stalled on a full instruction queue");
    check(n_hout_stall > 0, "host back-pressure on the result stream");
    check(dram.errors == 0, $sformatf("%0d DRAM protocol or timing errors", dram.errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
