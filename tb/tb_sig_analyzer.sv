// tb_sig_analyzer: self-checking testbench of the signature analyzer.
//
// Compares match with an independent bit-by-bit comparison for equal words,
// every single-bit difference on both solid backgrounds, and random words,
// with and without the read strobe.
module tb_sig_analyzer;

  localparam int DATA_W = 32;

  logic rd, match;
  logic [DATA_W-1:0] mem_out, signature;
  int checks = 0;
  int failures = 0;

  sig_analyzer #(.DATA_W(DATA_W)) dut (.rd, .mem_out, .signature, .match);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic r, logic [DATA_W-1:0] m, logic [DATA_W-1:0] s);
    bit same;
    rd = r; mem_out = m; signature = s;
    #1;
    same = 1'b1;
    for (int b = 0; b < DATA_W; b++) if (m[b] != s[b]) same = 1'b0;
    checks++;
    if (match != (!r || same)) begin
      failures++;
      $display("FAIL rd=%0b mem_out=%h signature=%h match=%0b", r, m, s, match);
    end
  endtask

  initial begin
    for (int r = 0; r < 2; r++) begin
      apply(r[0], '0, '0);
      apply(r[0], '1, '1);
      for (int b = 0; b < DATA_W; b++) begin
        apply(r[0], DATA_W'(1) << b, '0);
        apply(r[0], ~(DATA_W'(1) << b), '1);
      end
      for (int i = 0; i < 200; i++) begin
        logic [DATA_W-1:0] w;
        w = $urandom;
        apply(r[0], w, (i % 2 == 0) ? w : $urandom);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
