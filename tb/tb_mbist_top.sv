// tb_mbist_top: end-to-end testbench of the MBIST, at the default size
// (256 x 32 memory, 8-bit address counter).
//
// Runs complete tests on a fault-free memory and on memories with one
// injected fault each, and checks the BIST against a reference model kept in
// the testbench: the reference pass table gives, for every clock, the pass,
// the address and the operation; a reference copy of the memory, with the
// same fault applied, gives the data each read must return, and from it the
// expected pass/fail one clock later. Faults are injected by changing the
// memory array from the testbench between clock edges:
//   saf0 / saf1   a bit that always reads 0 / 1 (stuck-at fault)
//   tfup / tfdn   a bit that cannot change from 0 to 1 / from 1 to 0
//                 (transition fault)
//   drf           a stored 0 that turns into 1 during the pause (retention)
//   cfid          a rising write of an aggressor bit forces a victim bit to 0
//                 (idempotent coupling fault), once with the victim below and
//                 once above the aggressor
//   af            address decoder fault: a write to one address also writes
//                 a second word
// For stuck-at, transition and retention faults the set of read passes that
// fail (the syndrome) is compared with the fault table of the design. The
// address decoder fault is checked to go unseen: every write pass writes the
// same word to all addresses, so the second word always receives the value
// it would have been given anyway.
// Also checked: memory strobes and address each clock, no memory access in
// the pause, test length 1 + 11*256 clocks, system writes ignored in test
// mode, system access through the collar after the test, abort by t_mode and
// an asynchronous reset in mid-test. Each of these mechanisms is counted and
// a mechanism that never happened counts as a failure.
module tb_mbist_top;
  import mbist_pkg::*;
  import march_ref_pkg::*;

  localparam int C_SIZE = 8;
  localparam int DATA_W = 32;
  localparam int N = 2 ** C_SIZE;

  typedef enum int {F_NONE, F_SAF0, F_SAF1, F_TFUP, F_TFDN, F_DRF, F_CFID, F_AF} fault_kind_t;

  logic clk = 1'b0;
  logic rst, t_mode;
  logic sys_cs, sys_we;
  logic [C_SIZE-1:0] sys_addr;
  logic [DATA_W-1:0] sys_wdata, sys_rdata;
  logic done, pass, fail;
  state_t state;

  mbist_top dut (
    .clk, .rst, .t_mode, .sys_cs, .sys_we, .sys_addr, .sys_wdata, .sys_rdata,
    .done, .pass, .fail, .state
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  // Mechanism counters.
  int n_done = 0, n_fail_seen = 0, n_pass_seen = 0, n_pause_idle = 0;
  int n_abort = 0, n_reset = 0, n_sys_blocked = 0, n_sys_access = 0;
  int n_fault_caught = 0, n_fault_escape = 0, n_syndrome = 0;

  logic [DATA_W-1:0] ref_mem [N];

  // Active fault.
  fault_kind_t f_kind = F_NONE;
  int f_addr, f_bit, f_aggr, f_abit;
  logic aggr_prev, tf_prev, af_pending;
  // Which of the five read passes saw a mismatch (bit 4 = first read pass).
  logic [4:0] syndrome;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s at %0t: state=%0d", what, $time, state);
    end
  endtask

  initial begin
    repeat (14 * (NUM_PASSES * N + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Apply the static part of the fault to the memory under test and to the
  // reference copy (called between clock edges).
  task automatic apply_fault();
    case (f_kind)
      F_SAF0: begin dut.u_sram.mem[f_addr][f_bit] = 1'b0; ref_mem[f_addr][f_bit] = 1'b0; end
      F_SAF1: begin dut.u_sram.mem[f_addr][f_bit] = 1'b1; ref_mem[f_addr][f_bit] = 1'b1; end
      F_TFUP: begin
        if (!tf_prev && dut.u_sram.mem[f_addr][f_bit]) dut.u_sram.mem[f_addr][f_bit] = 1'b0;
        tf_prev = dut.u_sram.mem[f_addr][f_bit];
      end
      F_TFDN: begin
        if (tf_prev && !dut.u_sram.mem[f_addr][f_bit]) dut.u_sram.mem[f_addr][f_bit] = 1'b1;
        tf_prev = dut.u_sram.mem[f_addr][f_bit];
      end
      F_CFID: begin
        if (!aggr_prev && dut.u_sram.mem[f_aggr][f_abit]) dut.u_sram.mem[f_addr][f_bit] = 1'b0;
        aggr_prev = dut.u_sram.mem[f_aggr][f_abit];
      end
      F_AF: if (af_pending) dut.u_sram.mem[f_addr] = dut.u_sram.mem[f_aggr];
      default: ;
    endcase
  endtask

  // Reference write including the coupling effect.
  task automatic ref_write(int a, logic [DATA_W-1:0] d);
    logic aggr_old, cell_old;
    aggr_old = ref_mem[f_aggr][f_abit];
    cell_old = ref_mem[f_addr][f_bit];
    ref_mem[a] = d;
    if (f_kind == F_TFUP && a == f_addr && !cell_old) ref_mem[f_addr][f_bit] = 1'b0;
    if (f_kind == F_TFDN && a == f_addr && cell_old) ref_mem[f_addr][f_bit] = 1'b1;
    if (f_kind == F_CFID && a == f_aggr && !aggr_old && d[f_abit]) ref_mem[f_addr][f_bit] = 1'b0;
    if (f_kind == F_AF && a == f_aggr) ref_mem[f_addr] = d;
    if (f_kind == F_SAF0) ref_mem[f_addr][f_bit] = 1'b0;
    if (f_kind == F_SAF1) ref_mem[f_addr][f_bit] = 1'b1;
  endtask

  // One test, k_stop clocks (complete test if k_stop < 0). Returns how many
  // read mismatches the reference predicted.
  task automatic run_test(int k_stop, bit sys_noise, output int cycles, output int mism);
    bit exp_pass, rd_now;
    pass_t ps;
    int a, total;
    logic [DATA_W-1:0] d;
    total = (k_stop < 0) ? NUM_PASSES * N : k_stop;
    mism = 0;
    for (int i = 0; i < N; i++) ref_mem[i] = dut.u_sram.mem[i];
    aggr_prev = dut.u_sram.mem[f_aggr][f_abit];
    tf_prev = dut.u_sram.mem[f_addr][f_bit];
    syndrome = '0;
    af_pending = 1'b0;
    exp_pass = pass;
    t_mode = 1'b1;
    @(negedge clk);
    cycles = 1;
    for (int k = 0; k < total; k++) begin
      apply_fault();
      ps = pass_of(k / N);
      a  = addr_of(ps, k % N, N);
      d  = {DATA_W{ps.data}};
      // Controller and strobes of this cycle.
      check(state == ps.st, "state");
      check(!done, "done low during test");
      check(dut.u_sram.cs == (ps.rd || ps.wr), "memory select");
      check(dut.u_sram.we == ps.wr, "memory write enable");
      if (ps.rd || ps.wr) begin
        check(dut.u_sram.addr == C_SIZE'(a), "memory address");
      end
      if (ps.wr) check(dut.u_sram.wdata == d, "write data");
      // Address decoder fault: the write of this cycle to the faulty address
      // also reaches the second word (applied after the clock edge).
      af_pending = dut.u_sram.cs && dut.u_sram.we && dut.u_sram.addr == C_SIZE'(f_aggr);
      if (ps.st == PAUSE && !dut.u_sram.cs) n_pause_idle++;
      // Result of the previous read.
      check(pass == exp_pass && fail == !exp_pass, "pass/fail");
      if (fail) n_fail_seen++;
      if (pass) n_pass_seen++;
      // Drive a system write that the collar must ignore.
      if (sys_noise) begin
        sys_cs = 1'b1; sys_we = 1'b1;
        sys_addr = C_SIZE'($urandom); sys_wdata = $urandom;
        n_sys_blocked++;
      end
      // Reference operation of this cycle.
      if (ps.rd) begin
        rd_now = (ref_mem[a] == d);
        if (!rd_now) begin
          mism++;
          syndrome[4 - read_index(k / N)] = 1'b1;
        end
        exp_pass = rd_now;
      end
      if (ps.wr) ref_write(a, d);
      // Retention fault: a 0 flips to 1 half-way through the pause.
      if (f_kind == F_DRF && ps.st == PAUSE && (k % N) == N / 2) begin
        dut.u_sram.mem[f_addr][f_bit] = 1'b1;
        ref_mem[f_addr][f_bit] = 1'b1;
      end
      @(negedge clk);
      cycles++;
    end
    sys_cs = 1'b0; sys_we = 1'b0;
    if (k_stop < 0) check(pass == exp_pass && fail == !exp_pass, "last pass/fail");
  endtask

  // Position of a read pass among the five read passes (0 = first).
  function automatic int read_index(int p);
    int r = 0;
    for (int q = 0; q < p; q++) if (pass_of(q).rd) r++;
    return r;
  endfunction

  // exp_syn: expected syndrome, one bit per read pass in test order, or -1
  // when only a minimum number of failing reads is required.
  task automatic full_test(fault_kind_t kind, int addr, int bt, int aggr, int abit,
                           int exp_mism_min, int exp_syn, bit sys_noise, string name);
    int cycles, mism;
    f_kind = kind; f_addr = addr; f_bit = bt; f_aggr = aggr; f_abit = abit;
    run_test(-1, sys_noise, cycles, mism);
    check(cycles == 1 + NUM_PASSES * N, {name, ": test length"});
    check(state == S_DONE && done, {name, ": done"});
    if (state == S_DONE && done) n_done++;
    check(mism >= exp_mism_min, {name, ": expected mismatches"});
    if (exp_syn >= 0) begin
      check(syndrome == 5'(exp_syn), {name, ": syndrome"});
      n_syndrome++;
    end
    if (kind != F_NONE && mism > 0) n_fault_caught++;
    if (kind != F_NONE && mism == 0) n_fault_escape++;
    $display("%s: %0d failing reads, syndrome F1..F5 = %05b, %0d clocks", name, mism, syndrome, cycles);
    t_mode = 1'b0;
    @(negedge clk);
    check(state == S_IDLE && !done, {name, ": back to idle"});
    f_kind = F_NONE;
  endtask

  int cycles, mism;

  initial begin
    rst = 1'b0; t_mode = 1'b0;
    #1 rst = 1'b1;  // a rising edge, so the asynchronous reset acts at once
    sys_cs = 1'b0; sys_we = 1'b0; sys_addr = '0; sys_wdata = '0;
    f_aggr = 0; f_abit = 0; f_addr = 0; f_bit = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);

    // Fault-free memory, with system writes that must be ignored.
    full_test(F_NONE, 0, 0, 0, 0, 0, 0, 1'b1, "fault-free");
    check(n_fail_seen == 0, "no fail on a good memory");
    // After the test every word holds 0 (last write pass is w0); read it
    // through the system port.
    for (int i = 0; i < N; i++) begin
      sys_cs = 1'b1; sys_we = 1'b0; sys_addr = C_SIZE'(i);
      #1 check(sys_rdata == '0, "system read after test");
      n_sys_access++;
      @(negedge clk);
    end
    sys_cs = 1'b0;

    // Stuck-at and transition faults, with the syndromes of the five read
    // passes (r0, r1, r0, r1, r0) that the fault table of the design gives:
    // SAF0 and up-transition 01010, SAF1 and down-transition 10101.
    full_test(F_SAF0, 77, 5, 0, 0, 2, 'b01010, 1'b0, "stuck-at-0 word 77 bit 5");
    full_test(F_SAF1, 3, 0, 0, 0, 3, 'b10101, 1'b0, "stuck-at-1 word 3 bit 0");
    full_test(F_TFUP, 128, 16, 0, 0, 2, 'b01010, 1'b0, "up-transition word 128 bit 16");
    // The first read pass can only see a cell that cannot fall if the cell
    // held 1 before the test, so word 255 is first set to ones through the
    // system port (from a cleared cell the syndrome would be 00101).
    sys_cs = 1'b1; sys_we = 1'b1; sys_addr = 8'd255; sys_wdata = '1;
    @(negedge clk);
    sys_cs = 1'b0; sys_we = 1'b0;
    n_sys_access++;
    full_test(F_TFDN, 255, 9, 0, 0, 3, 'b10101, 1'b0, "down-transition word 255 bit 9");
    // Retention fault during the pause: seen by the read right after it.
    full_test(F_DRF, 200, 31, 0, 0, 1, 'b00100, 1'b0, "retention word 200 bit 31");
    // Coupling fault, victim below the aggressor: caught in rdn1.
    full_test(F_CFID, 5, 7, 10, 7, 1, -1, 1'b0, "coupling victim 5 aggressor 10");
    // Coupling fault, victim above the aggressor: caught in rup1.
    full_test(F_CFID, 20, 7, 10, 7, 1, -1, 1'b0, "coupling victim 20 aggressor 10");
    // Address decoder fault: writes to address 60 also write word 40. No
    // read pass sees it (syndrome 00000).
    full_test(F_AF, 40, 0, 60, 0, 0, 'b00000, 1'b0, "address fault 60 -> 40");
    check(n_fault_escape == 1, "address fault escapes");

    // Abort: t_mode falls in the middle of rdn1; the memory is then usable
    // from the system port.
    run_test(3 * N + 9, 1'b0, cycles, mism);
    t_mode = 1'b0;
    @(negedge clk);
    check(state == S_IDLE && !done, "abort to idle");
    if (state == S_IDLE) n_abort++;
    sys_cs = 1'b1; sys_we = 1'b1; sys_addr = 8'd42; sys_wdata = 32'h1234_5678;
    @(negedge clk);
    sys_we = 1'b0;
    #1 check(sys_rdata == 32'h1234_5678, "system write/read after abort");
    n_sys_access++;
    @(negedge clk);
    sys_cs = 1'b0;

    // Asynchronous reset in the middle of the pause, then a clean full test.
    run_test(5 * N + 100, 1'b0, cycles, mism);
    #2 rst = 1'b1;
    #1 check(state == S_IDLE && !fail, "async reset");
    if (state == S_IDLE) n_reset++;
    @(negedge clk);
    rst = 1'b0; t_mode = 1'b0;
    @(negedge clk);
    full_test(F_NONE, 0, 0, 0, 0, 0, 0, 1'b0, "after reset");

    $display("mechanisms: done=%0d fail=%0d pass=%0d pause_idle=%0d abort=%0d reset=%0d sys_blocked=%0d sys_access=%0d caught=%0d escaped=%0d",
             n_done, n_fail_seen, n_pass_seen, n_pause_idle, n_abort, n_reset,
             n_sys_blocked, n_sys_access, n_fault_caught, n_fault_escape);
    check(n_done > 0, "mechanism: done");
    check(n_fail_seen > 0, "mechanism: fail");
    check(n_pass_seen > 0, "mechanism: pass");
    check(n_pause_idle > 0, "mechanism: pause without access");
    check(n_abort > 0, "mechanism: abort");
    check(n_reset > 0, "mechanism: reset");
    check(n_sys_blocked > 0, "mechanism: system blocked in test mode");
    check(n_sys_access > 0, "mechanism: system access");
    check(n_fault_caught >= 6, "mechanism: faults caught");
    check(n_syndrome > 0, "mechanism: syndromes compared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
