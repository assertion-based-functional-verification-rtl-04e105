// sig_analyzer: signature analyzer (comparator) of the MBIST datapath.
//
// In every read cycle (rd=1) it compares the word read from the memory,
// mem_out, with the expected word, signature, from the pattern generator and
// drives match=1 when they are equal and match=0 when any bit differs. In
// cycles without a read match is held at 1, so the controller never sees a
// false failure. Purely combinational: the controller registers match into
// pass/fail on the clock edge that ends the read cycle.
//
// The comparison follows the design's description of the analyzer; forcing
// match=1 outside read cycles is this design's own choice.
module sig_analyzer #(
  parameter int unsigned DATA_W = 32
) (
  input  logic              rd,
  input  logic [DATA_W-1:0] mem_out,
  input  logic [DATA_W-1:0] signature,
  output logic              match
);

  assign match = !rd || (mem_out == signature);

endmodule
