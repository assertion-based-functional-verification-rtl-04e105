// tb_test_collar: self-checking testbench of the test collar.
//
// Drives independent random requests on the system and the BIST side and
// checks that the memory port follows the BIST side exactly when t_mode is
// high and the system side when it is low.
module tb_test_collar;

  localparam int ADDR_W = 8;
  localparam int DATA_W = 32;

  logic t_mode;
  logic sys_cs, sys_we, bist_cs, bist_we, mem_cs, mem_we;
  logic [ADDR_W-1:0] sys_addr, bist_addr, mem_addr;
  logic [DATA_W-1:0] sys_wdata, bist_wdata, mem_wdata;
  int checks = 0;
  int failures = 0;

  test_collar #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      t_mode     = $urandom_range(0, 1) != 0;
      sys_cs     = $urandom_range(0, 1) != 0;
      sys_we     = $urandom_range(0, 1) != 0;
      sys_addr   = ADDR_W'($urandom);
      sys_wdata  = $urandom;
      bist_cs    = $urandom_range(0, 1) != 0;
      bist_we    = $urandom_range(0, 1) != 0;
      bist_addr  = ADDR_W'($urandom);
      bist_wdata = $urandom;
      #1;
      checks++;
      if (t_mode ? (mem_cs != bist_cs || mem_we != bist_we || mem_addr != bist_addr ||
                    mem_wdata != bist_wdata)
                 : (mem_cs != sys_cs || mem_we != sys_we || mem_addr != sys_addr ||
                    mem_wdata != sys_wdata)) begin
        failures++;
        $display("FAIL t_mode=%0b", t_mode);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
