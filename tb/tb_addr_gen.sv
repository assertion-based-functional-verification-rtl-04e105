// tb_addr_gen: self-checking testbench of the address generator.
//
// Drives random load/step/up commands and compares the counter, every clock,
// with a reference counter kept in the testbench; also checks a full up and a
// full down sweep with wrap-around, and the asynchronous reset.
module tb_addr_gen;
  import mbist_pkg::*;

  localparam int C_SIZE = 8;

  logic clk = 1'b0;
  logic rst;
  cnt_ctrl_t cnt_ctrl;
  logic [C_SIZE-1:0] count;
  int ref_cnt;
  int checks = 0;
  int failures = 0;

  addr_gen #(.C_SIZE(C_SIZE)) dut (.clk, .rst, .cnt_ctrl, .count);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: count=%0d ref=%0d", what, $time, count, ref_cnt);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; cnt_ctrl = '0;
    @(negedge clk);
    check(count == 0, "reset");
    rst = 1'b0;
    ref_cnt = 0;
    // Full down sweep from c_max, then up sweep from c_min, with wrap.
    cnt_ctrl = '{step: 1'b0, up: 1'b0, load: 1'b1, load_max: 1'b1};
    @(negedge clk);
    ref_cnt = 255;
    check(count == 8'(ref_cnt), "load max");
    cnt_ctrl = '{step: 1'b1, up: 1'b0, load: 1'b0, load_max: 1'b0};
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      ref_cnt = (ref_cnt + 255) % 256;
      check(count == 8'(ref_cnt), "down sweep");
    end
    cnt_ctrl = '{step: 1'b1, up: 1'b1, load: 1'b0, load_max: 1'b0};
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      ref_cnt = (ref_cnt + 1) % 256;
      check(count == 8'(ref_cnt), "up sweep");
    end
    // Random commands.
    for (int i = 0; i < 2000; i++) begin
      cnt_ctrl.step     = $urandom_range(0, 3) != 0;
      cnt_ctrl.up       = $urandom_range(0, 1) != 0;
      cnt_ctrl.load     = $urandom_range(0, 15) == 0;
      cnt_ctrl.load_max = $urandom_range(0, 1) != 0;
      @(negedge clk);
      if (cnt_ctrl.load) ref_cnt = cnt_ctrl.load_max ? 255 : 0;
      else if (cnt_ctrl.step) ref_cnt = cnt_ctrl.up ? (ref_cnt + 1) % 256 : (ref_cnt + 255) % 256;
      check(count == 8'(ref_cnt), "random command");
    end
    // Asynchronous reset between edges.
    cnt_ctrl = '0;
    #2 rst = 1'b1;
    #1 check(count == 0, "async reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
