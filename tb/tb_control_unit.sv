// tb_control_unit: self-checking test of the control unit. The unit runs
// uPrograms from the library against the DRAM command generator and the
// behavioural DRAM model; operands are placed vertically in the model's rows
// directly, and the destination rows are compared lane by lane with results
// computed on the element values. For every operation the test also checks
// the number of row activations the uProgram implies and the exact time from
// the first ACTIVATE to the last PRECHARGE (sum of the AAP and AP durations).
// Equality, 3-input logic, the left shift (row copies), division and the nested-loop programs (2n-bit
// multiplication, bitcount) are included. The third source of a 3-input
// operation and the ITE predicate (bit 0) share rows RP.
// Short DRAM timings keep the run brief.
module tb_control_unit;
  import simdram_pkg::*;
  import simdram_uprog_pkg::*;

  localparam int T_RCD = 3, T_RAS = 5, T_RP = 3;
  localparam int LANES = 128;
  localparam int RA = 40, RB = 120, RD = 200, RS = 300, RP = 380;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               uprog_we = 0, optab_we = 0, start = 0;
  logic [UPC_W-1:0]   uprog_addr = '0, optab_addr = '0;
  uop_t               uprog_wdata = '0;
  logic [OPID_W-1:0]  optab_idx = '0, op_id = '0;
  logic [NBITS_W-1:0] nbits = '0;
  row_t [N_OPND-1:0]  base = '0;
  logic               busy, done, req_valid, req_ready, gen_idle, rd_valid;
  dram_req_t          req;
  dram_cmd_t          cmd;
  dq_t                rd_data;

  control_unit dut (
    .clk, .rst_n, .uprog_we, .uprog_addr, .uprog_wdata, .optab_we, .optab_idx,
    .optab_addr, .start, .op_id, .nbits, .base, .busy_o(busy), .done_o(done),
    .req_valid, .req_ready, .req
  );
  dram_cmd_gen #(.T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP), .T_WR(3), .T_RTP(2)) gen (
    .clk, .rst_n, .req_valid, .req_ready, .req, .cmd_o(cmd), .idle_o(gen_idle)
  );
  dram_model #(.N_ROWS(512), .N_WORDS(LANES / DQ_W), .T_RCD(T_RCD), .T_RAS(T_RAS),
               .T_RP(T_RP)) dram (
    .clk, .rst_n, .cmd, .rd_valid, .rd_data
  );

  int checks = 0, failures = 0;
  longint cyc = 0, t_first_act = -1, t_last_pre = -1;
  always @(posedge clk) begin
    cyc++;
    if (cmd.cmd == CMD_ACT && t_first_act < 0) t_first_act = cyc;
    if (cmd.cmd == CMD_PRE) t_last_pre = cyc;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic put_vertical(input int row0, input int n, input longint unsigned v[LANES]);
    for (int i = 0; i < n; i++)
      for (int l = 0; l < LANES; l++) dram.mem[row0 + i][l] = v[l][i];
  endtask

  function automatic longint unsigned get_lane(input int row0, input int n, input int l);
    longint unsigned r = 0;
    for (int i = 0; i < n; i++) r[i] = dram.mem[row0 + i][l];
    return r;
  endfunction

  task automatic run_op(input op_e op, input int n);
    longint unsigned a[LANES], b[LANES], p[LANES], exp_v, got;
    int n_aap, n_ap, act0, err0, nres, lane_bad;
    longint exp_t;
    for (int l = 0; l < LANES; l++) begin
      a[l] = {$urandom, $urandom};
      b[l] = {$urandom, $urandom};
      if (l % 7 == 0) b[l] = a[l];          // equal operands for GT
      if (op == OP_DIV && l % 3 == 0) b[l] = (b[l] & ((64'd1 << n) - 1)) >> (n / 2);  // small divisors
      if (op == OP_DIV && l % 11 == 0) b[l] = 0;
      p[l] = {$urandom, $urandom};
    end
    put_vertical(RA, n, a);
    put_vertical(RB, n, b);
    put_vertical(RP, n, p);
    count_requests(op, n, n_aap, n_ap);
    act0 = dram.n_act; err0 = dram.errors;
    t_first_act = -1;
    @(negedge clk);
    op_id = OPID_W'(int'(op)); nbits = NBITS_W'(n);
    base[0] = row_t'(RD); base[1] = row_t'(RA); base[2] = row_t'(RB);
    base[3] = row_t'(op inside {OP_ITE, OP_AND3, OP_OR3} ? RP : RS);
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    while (!gen_idle) @(negedge clk);
    repeat (T_RP + 2) @(negedge clk);
    nres = result_bits(op, n);
    lane_bad = 0;
    for (int l = 0; l < LANES; l++) begin
      exp_v = ref_op(op, n, a[l], b[l], p[l][0], p[l]);
      got = get_lane(RD, nres, l);
      if (got != exp_v) begin
        lane_bad++;
        if (lane_bad < 4) $display("  %s n=%0d lane %0d: a=%h b=%h got %h exp %h",
                                   op.name(), n, l, a[l], b[l], got, exp_v);
      end
    end
    check(lane_bad == 0, $sformatf("%s n=%0d results (%0d lanes wrong)", op.name(), n, lane_bad));
    check(dram.n_act - act0 == 2 * n_aap + n_ap,
          $sformatf("%s n=%0d activations %0d, expected %0d", op.name(), n,
                    dram.n_act - act0, 2 * n_aap + n_ap));
    exp_t = longint'(n_aap) * (2 * T_RAS + T_RP) + longint'(n_ap) * (T_RAS + T_RP) - T_RP;
    check(t_last_pre - t_first_act == exp_t,
          $sformatf("%s n=%0d first ACT to last PRE %0d cycles, expected %0d",
                    op.name(), n, t_last_pre - t_first_act, exp_t));
    check(dram.errors == err0, $sformatf("%s DRAM protocol/timing errors", op.name()));
    $display("%s n=%0d: %0d AAP + %0d AP, %0d cycles", op.name(), n, n_aap, n_ap, exp_t);
  endtask

  initial begin
    uop_t prog[$];
    int start_pc[N_LIB_OPS];
    build_library(prog, start_pc);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    foreach (prog[k]) begin
      uprog_we = 1'b1; uprog_addr = UPC_W'(k); uprog_wdata = prog[k];
      @(negedge clk);
    end
    uprog_we = 1'b0;
    for (int o = 0; o < N_LIB_OPS; o++) begin
      optab_we = 1'b1; optab_idx = OPID_W'(o); optab_addr = UPC_W'(start_pc[o]);
      @(negedge clk);
    end
    optab_we = 1'b0;
    for (int o = 0; o < N_LIB_OPS; o++) run_op(op_e'(o), 8);
    run_op(OP_ADD, 16);
    run_op(OP_SUB, 5);
    run_op(OP_GT, 12);
    run_op(OP_RELU, 3);
    run_op(OP_EQ, 12);
    run_op(OP_MUL, 5);
    run_op(OP_MUL, 16);
    run_op(OP_BITCOUNT, 1);
    run_op(OP_BITCOUNT, 13);
    run_op(OP_OR3, 3);
    run_op(OP_SHL, 1);
    run_op(OP_SHL, 63);
    run_op(OP_DIV, 6);
    run_op(OP_DIV, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
