// tb_sram_sp: self-checking testbench of the single-port memory.
//
// Writes every word with a value derived from its address, reads all of them
// back through the asynchronous read port, checks that a write needs both cs
// and we, and finishes with random reads and writes against a reference array
// kept in the testbench.
module tb_sram_sp;

  localparam int ADDR_W = 8;
  localparam int DATA_W = 32;
  localparam int N = 2 ** ADDR_W;

  logic clk = 1'b0;
  logic cs, we;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] wdata, rdata;
  logic [DATA_W-1:0] ref_mem [N];
  int checks = 0;
  int failures = 0;

  sram_sp #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) dut (.clk, .cs, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s addr=%0d rdata=%h", what, addr, rdata);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cs = 1'b0; we = 1'b0; addr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < N; a++) begin
      cs = 1'b1; we = 1'b1; addr = ADDR_W'(a);
      wdata = {16'(a * 7 + 3), 16'(~a)};
      ref_mem[a] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    for (int a = N - 1; a >= 0; a--) begin
      addr = ADDR_W'(a);
      #1 check(rdata == ref_mem[a], "read back");
      @(negedge clk);
    end
    // No write without cs or without we.
    addr = 8'd17; wdata = 32'hdead_beef;
    cs = 1'b0; we = 1'b1; @(negedge clk);
    check(rdata == ref_mem[17], "no write without cs");
    cs = 1'b1; we = 1'b0; @(negedge clk);
    check(rdata == ref_mem[17], "no write without we");
    // Random traffic.
    for (int i = 0; i < 3000; i++) begin
      cs = $urandom_range(0, 3) != 0;
      we = $urandom_range(0, 1) != 0;
      addr = ADDR_W'($urandom);
      wdata = $urandom;
      #1 check(rdata == ref_mem[addr], "random read");
      if (cs && we) ref_mem[addr] = wdata;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
