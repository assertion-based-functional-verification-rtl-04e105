// tb_mbist_ctrl: self-checking testbench of the MBIST controller (with the
// address counter it steers).
//
// Runs a complete test at the default size (256 addresses) with a random
// match pattern and checks, every clock, the state, address, en, rw, g_patt
// and hold against the reference pass table, and pass/fail one clock after
// each graded read. Checks the total test length (1 + 11*256 clocks from
// t_mode to done), the hold of s_done while t_mode stays high and the return
// to s_idle, an abort by t_mode falling mid-test and an asynchronous reset
// mid-test. Inputs change and outputs are sampled on the falling clock edge.
module tb_mbist_ctrl;
  import mbist_pkg::*;
  import march_ref_pkg::*;

  localparam int C_SIZE = 8;
  localparam int N = 2 ** C_SIZE;

  logic clk = 1'b0;
  logic rst, t_mode, match;
  logic [C_SIZE-1:0] count;
  cnt_ctrl_t cnt_ctrl;
  logic en, rw, g_patt, hold, done, pass, fail;
  state_t state;

  int checks = 0;
  int failures = 0;

  mbist_ctrl #(.C_SIZE(C_SIZE)) dut (
    .clk, .rst, .t_mode, .match, .count, .cnt_ctrl,
    .en, .rw, .g_patt, .hold, .state, .done, .pass, .fail
  );
  addr_gen #(.C_SIZE(C_SIZE)) u_addr (.clk, .rst, .cnt_ctrl, .count);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: state=%0d count=%0d", what, $time, state, count);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (60 * N + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run k_stop clocks of a test (all of it if k_stop < 0); return with the
  // last sampled read result in exp_pass.
  task automatic run_test(int k_stop, output int cycles);
    bit exp_pass;
    pass_t ps;
    int total;
    total = (k_stop < 0) ? NUM_PASSES * N : k_stop;
    exp_pass = pass;
    t_mode = 1'b1;
    match = 1'b1;
    @(negedge clk);
    cycles = 1;
    for (int k = 0; k < total; k++) begin
      ps = pass_of(k / N);
      check(state == ps.st, "state");
      check(count == C_SIZE'(addr_of(ps, k % N, N)), "address");
      check(en, "en");
      check(rw == (ps.rd ? 1'b1 : 1'b0), "rw");
      check(g_patt == ps.data, "g_patt");
      check(hold == (ps.st == PAUSE), "hold");
      check(!done, "done low");
      check(pass == exp_pass && fail == !exp_pass, "pass/fail");
      if (ps.rd) begin
        match = ($urandom_range(0, 7) != 0);
        exp_pass = match;
      end else begin
        match = $urandom_range(0, 1) != 0;  // ignored outside reads
      end
      @(negedge clk);
      cycles++;
    end
  endtask

  int cycles;

  initial begin
    rst = 1'b0; t_mode = 1'b0;
    match = 1'b1;
    #1 rst = 1'b1;  // a rising edge, so the asynchronous reset acts at once
    repeat (3) @(negedge clk);
    check(state == S_IDLE && !en && !done && pass && !fail, "reset values");
    rst = 1'b0;
    repeat (4) @(negedge clk);
    check(state == S_IDLE && !en, "idle without t_mode");

    // 1. Complete test.
    run_test(-1, cycles);
    check(cycles == 1 + NUM_PASSES * N, "test length");
    check(state == S_DONE && done && !en, "done reached");
    repeat (5) @(negedge clk);
    check(state == S_DONE && done, "done held while t_mode high");
    t_mode = 1'b0;
    @(negedge clk);
    check(state == S_IDLE && !done && !en, "done -> idle when t_mode drops");

    // 2. Abort by t_mode falling in the middle of pass rdn0.
    run_test(6 * N + 17, cycles);
    t_mode = 1'b0;
    @(negedge clk);
    check(state == S_IDLE && !en, "abort to idle");
    @(negedge clk);
    check(state == S_IDLE, "stay idle after abort");

    // 3. Asynchronous reset in the middle of pass wup1.
    run_test(2 * N + 40, cycles);
    #2 rst = 1'b1;
    #1 check(state == S_IDLE && !en && pass && !fail, "async reset");
    @(negedge clk);
    check(state == S_IDLE, "held in reset with t_mode high");
    rst = 1'b0;
    t_mode = 1'b0;
    @(negedge clk);

    // 4. A second complete run after the reset restarts from the beginning.
    run_test(-1, cycles);
    check(state == S_DONE && done, "second test done");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
