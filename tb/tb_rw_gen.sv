// tb_rw_gen: self-checking testbench of the read/write generator.
//
// Walks all eight combinations of en, rw and hold and checks cs, we and rd
// against the expected truth table: no access when disabled or in the pause,
// a write when rw=0 and a read (with compare) when rw=1.
module tb_rw_gen;

  logic en, rw, hold, cs, we, rd;
  int checks = 0;
  int failures = 0;

  rw_gen dut (.en, .rw, .hold, .cs, .we, .rd);

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_cs, exp_we, exp_rd;
    for (int c = 0; c < 8; c++) begin
      {en, rw, hold} = 3'(c);
      #1;
      exp_cs = (c == 3'b100) || (c == 3'b110);
      exp_we = (c == 3'b100);
      exp_rd = (c == 3'b110);
      checks += 3;
      if (cs != exp_cs) begin failures++; $display("FAIL cs en=%0b rw=%0b hold=%0b", en, rw, hold); end
      if (we != exp_we) begin failures++; $display("FAIL we en=%0b rw=%0b hold=%0b", en, rw, hold); end
      if (rd != exp_rd) begin failures++; $display("FAIL rd en=%0b rw=%0b hold=%0b", en, rw, hold); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
