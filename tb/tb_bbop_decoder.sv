// tb_bbop_decoder: self-checking test of the ISA front end. A random stream
// of instructions is pushed into the decoder; the control unit, the
// transposition unit and the command generator are played by the testbench,
// which finishes each started operation after a random delay and holds the
// generator busy for a while afterwards. Checked: every instruction comes out
// on the right interface, in order, with its fields; nothing is dispatched
// while an operation or the generator is still busy; the retired count; and
// that the queue stalls the host (inst_ready low) exactly when QDEPTH
// instructions are waiting.
module tb_bbop_decoder;
  import simdram_pkg::*;

  localparam int QDEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               inst_valid = 0, inst_ready;
  bbop_inst_t         inst = '0;
  logic               uprog_we, optab_we, cu_start, tu_start_wr, tu_start_rd;
  logic [UPC_W-1:0]   uprog_addr, optab_addr;
  uop_t               uprog_wdata;
  logic [OPID_W-1:0]  optab_idx, cu_op_id;
  logic [NBITS_W-1:0] cu_nbits, tu_nbits;
  row_t [N_OPND-1:0]  cu_base;
  row_t               tu_base;
  col_t               tu_col;
  logic               cu_done = 0, tu_done = 0, gen_idle = 1;
  logic               busy;
  logic [31:0]        retired;

  bbop_decoder #(.QDEPTH(QDEPTH)) dut (
    .clk, .rst_n, .inst_valid, .inst_ready, .inst,
    .uprog_we, .uprog_addr, .uprog_wdata, .optab_we, .optab_idx, .optab_addr,
    .cu_start, .cu_op_id, .cu_nbits, .cu_base, .cu_done,
    .tu_start_wr, .tu_start_rd, .tu_base, .tu_col, .tu_nbits, .tu_done,
    .gen_idle, .busy_o(busy), .retired_o(retired)
  );

  int checks = 0, failures = 0, stalls = 0;
  bbop_inst_t sent[$];
  int n_sent = 0, n_seen = 0;
  bit unit_busy = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // Monitor: compare each dispatch with the next instruction sent.
  always @(posedge clk) begin
    bbop_inst_t e;
    int nd;
    if (rst_n) begin
      nd = int'(uprog_we) + int'(optab_we) + int'(cu_start) + int'(tu_start_wr) + int'(tu_start_rd);
      check(nd <= 1, "at most one dispatch per cycle");
      if (nd == 1) begin
        check(!unit_busy, "dispatch while an operation is outstanding");
        e = sent.pop_front();
        n_seen++;
        unique case (e.op)
          BB_UPROG_WR: check(uprog_we && uprog_addr == e.col[UPC_W-1:0] &&
                             uprog_wdata == uop_t'(e.data), "uProgram write fields");
          BB_OPTAB_WR: check(optab_we && optab_idx == e.op_id &&
                             optab_addr == e.col[UPC_W-1:0], "operation table write fields");
          BB_EXEC:     check(cu_start && cu_op_id == e.op_id && cu_nbits == e.nbits &&
                             cu_base == e.row, "execute fields");
          BB_TRSP_WR:  check(tu_start_wr && tu_base == e.row[0] && tu_col == e.col &&
                             tu_nbits == e.nbits, "transpose-write fields");
          BB_TRSP_RD:  check(tu_start_rd && tu_base == e.row[0] && tu_col == e.col &&
                             tu_nbits == e.nbits, "transpose-read fields");
          default:     check(1'b0, "dispatch of a NOP");
        endcase
        if (e.op inside {BB_EXEC, BB_TRSP_WR, BB_TRSP_RD}) unit_busy = 1;
      end
    end
  end

  // Fake units: finish after a random delay, then keep the generator busy.
  initial begin
    forever begin
      @(negedge clk);
      if (unit_busy) begin
        repeat ($urandom_range(3, 40)) @(negedge clk);
        gen_idle = 1'b0;
        if ($urandom_range(0, 1) == 1) cu_done = 1'b1; else tu_done = 1'b1;
        @(negedge clk);
        cu_done = 1'b0; tu_done = 1'b0;
        repeat ($urandom_range(0, 10)) @(negedge clk);
        gen_idle = 1'b1;
        unit_busy = 0;
      end
    end
  end

  initial begin
    int r0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      bbop_inst_t x;
      x = bbop_inst_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      x.op = bbop_e'($urandom_range(1, 5));
      inst_valid = 1'b1; inst = x;
      while (!inst_ready) begin
        stalls++;
        @(negedge clk);
      end
      sent.push_back(x);
      n_sent++;
      @(negedge clk);
      inst_valid = 1'b0;
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 30)) @(negedge clk);
    end
    // Queue depth: hold the decoder in an operation, then fill the queue.
    while (busy) @(negedge clk);
    begin
      automatic bbop_inst_t x = '0;
      automatic int accepted = 0;
      x.op = BB_EXEC;
      inst_valid = 1'b1; inst = x;
      @(negedge clk);
      sent.push_back(x); n_sent++;
      x.op = BB_OPTAB_WR;
      inst = x;
      while (inst_ready) begin
        sent.push_back(x); n_sent++; accepted++;
        @(negedge clk);
      end
      inst_valid = 1'b0;
      check(accepted == QDEPTH, $sformatf("queue took %0d instructions behind an operation, expected %0d",
                                          accepted, QDEPTH));
    end
    while (busy || sent.size() > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    check(n_seen == n_sent, $sformatf("%0d dispatched of %0d sent", n_seen, n_sent));
    check(retired == 32'(n_sent), $sformatf("retired %0d, expected %0d", retired, n_sent));
    check(stalls > 0, "host was stalled by a full queue at least once");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
