// sram_sp: single-port memory under test, 2**ADDR_W words of DATA_W bits
// (256 x 32 by default).
//
// Write: on the rising clock edge when cs and we are high, wdata is stored at
// addr. Read: rdata always shows the word at addr, combinationally (an
// asynchronous read port), so a read issued in one cycle is compared and
// graded before the clock edge that ends that cycle. The array is not reset.
//
// The design names a 32-bit single-port SRAM and sizes the controller's
// address counter for it; the array model with an asynchronous read port is
// this design's own, chosen because the controller grades the data of the
// address it drives in the same cycle. A silicon SRAM macro with a registered
// read port would need a one-cycle delay on match.
module sram_sp #(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              cs,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (cs && we)
      mem[addr] <= wdata;
  end

  assign rdata = mem[addr];

endmodule
