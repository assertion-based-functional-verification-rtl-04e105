// test_collar: memory access multiplexer between the system and the MBIST.
//
// The memory under test has a single port. In normal operation (t_mode=0) the
// system drives it; in test mode (t_mode=1) the MBIST datapath does, and the
// system's requests are ignored. The read data is not multiplexed: the memory
// output goes to both the system and the signature analyzer. Purely
// combinational; the selection follows t_mode in the same cycle.
//
// The design shows a test collar between the MBIST generators and the SRAM
// but does not describe it; selecting by t_mode (the test request that hands
// the memory to the controller) is this design's own choice.
module test_collar #(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned DATA_W = 32
) (
  input  logic              t_mode,
  // system (functional) side
  input  logic              sys_cs,
  input  logic              sys_we,
  input  logic [ADDR_W-1:0] sys_addr,
  input  logic [DATA_W-1:0] sys_wdata,
  // MBIST side
  input  logic              bist_cs,
  input  logic              bist_we,
  input  logic [ADDR_W-1:0] bist_addr,
  input  logic [DATA_W-1:0] bist_wdata,
  // memory side
  output logic              mem_cs,
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [DATA_W-1:0] mem_wdata
);

  always_comb begin
    if (t_mode) begin
      mem_cs    = bist_cs;
      mem_we    = bist_we;
      mem_addr  = bist_addr;
      mem_wdata = bist_wdata;
    end else begin
      mem_cs    = sys_cs;
      mem_we    = sys_we;
      mem_addr  = sys_addr;
      mem_wdata = sys_wdata;
    end
  end

endmodule
