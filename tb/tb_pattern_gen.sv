// tb_pattern_gen: self-checking testbench of the pattern generator.
//
// For all four combinations of g_patt and en, checks that the data word is
// solid ones only when enabled with g_patt=1 and solid zeros otherwise, bit
// by bit.
module tb_pattern_gen;

  localparam int DATA_W = 32;

  logic g_patt, en;
  logic [DATA_W-1:0] pattern;
  int checks = 0;
  int failures = 0;

  pattern_gen #(.DATA_W(DATA_W)) dut (.g_patt, .en, .pattern);

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 4; c++) begin
        g_patt = c[0];
        en     = c[1];
        #1;
        for (int b = 0; b < DATA_W; b++) begin
          checks++;
          if (pattern[b] != (c[0] && c[1])) begin
            failures++;
            $display("FAIL bit %0d g_patt=%0b en=%0b", b, g_patt, en);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
