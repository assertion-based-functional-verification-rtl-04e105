// pattern_gen: data pattern generator of the MBIST datapath.
//
// The March C test uses solid data backgrounds: every bit of the word is the
// marching value g_patt (0 for the "0" passes, 1 for the "1" passes). This
// block expands g_patt into the DATA_W-bit word that is written to the memory
// in write passes and expected back from it in read passes (the controller
// calls the expected word the signature). While the BIST is not enabled
// (en=0) the word is held at zero. Purely combinational.
//
// Expanding the 0/1 control value into a data word follows the design's
// description of the pattern generator; the all-zero output when disabled is
// this design's own choice.
module pattern_gen #(
  parameter int unsigned DATA_W = 32
) (
  input  logic              g_patt,
  input  logic              en,
  output logic [DATA_W-1:0] pattern
);

  assign pattern = {DATA_W{g_patt & en}};

endmodule
