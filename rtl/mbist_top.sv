// mbist_top: memory built-in self-test of a single-port SRAM with a
// hardwired March C + retention-pause controller.
//
// Structure (one instance each):
//   mbist_ctrl   FSM that sequences the test and grades every read
//   addr_gen     up/down address counter, steered by the controller
//   pattern_gen  solid 0/1 data word from the controller's g_patt
//   rw_gen       memory strobes from the controller's rw/en/hold
//   sig_analyzer compares the memory output with the expected word -> match
//   test_collar  hands the memory port to the BIST while t_mode is high
//   sram_sp      the memory under test (2**C_SIZE x DATA_W, 256 x 32)
//
// Operation: hold rst low, raise t_mode and keep it high. The test writes,
// reads and pauses as described in mbist_ctrl and asserts done after
// 1 + 11 * 2**C_SIZE clocks (2817 at the default size). During the five read
// passes pass/fail report, one clock after each read, whether that word read
// back as expected. Lowering t_mode returns the memory to the system port
// (sys_*) and aborts an unfinished test; rst (asynchronous, active high)
// resets the controller and the address counter, not the memory contents.
//
// The block set and the signals between them (t_mode, en, rw, g_patt, match,
// done, pass, fail) follow the design's MBIST architecture. Timing: the
// address, pattern and strobes of a cycle are all combinational from
// registers, the memory read is asynchronous and match is registered by the
// controller at the end of the cycle, so one word is accessed per clock.
module mbist_top
  import mbist_pkg::*;
#(
  parameter int unsigned C_SIZE = 8,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              t_mode,
  // system access to the memory while t_mode is low
  input  logic              sys_cs,
  input  logic              sys_we,
  input  logic [C_SIZE-1:0] sys_addr,
  input  logic [DATA_W-1:0] sys_wdata,
  output logic [DATA_W-1:0] sys_rdata,
  // test status
  output logic              done,
  output logic              pass,
  output logic              fail,
  output state_t            state
);

  cnt_ctrl_t         cnt_ctrl;
  logic [C_SIZE-1:0] count;
  logic              en, rw, g_patt, hold, match;
  logic              bist_cs, bist_we, bist_rd;
  logic [DATA_W-1:0] pattern;
  logic              mem_cs, mem_we;
  logic [C_SIZE-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;

  mbist_ctrl #(.C_SIZE(C_SIZE)) u_ctrl (
    .clk, .rst, .t_mode, .match, .count, .cnt_ctrl,
    .en, .rw, .g_patt, .hold, .state, .done, .pass, .fail
  );

  addr_gen #(.C_SIZE(C_SIZE)) u_addr (
    .clk, .rst, .cnt_ctrl, .count
  );

  pattern_gen #(.DATA_W(DATA_W)) u_patt (
    .g_patt, .en, .pattern
  );

  rw_gen u_rw (
    .en, .rw, .hold, .cs(bist_cs), .we(bist_we), .rd(bist_rd)
  );

  sig_analyzer #(.DATA_W(DATA_W)) u_sa (
    .rd(bist_rd), .mem_out(mem_rdata), .signature(pattern), .match
  );

  test_collar #(.ADDR_W(C_SIZE), .DATA_W(DATA_W)) u_collar (
    .t_mode,
    .sys_cs, .sys_we, .sys_addr, .sys_wdata,
    .bist_cs, .bist_we, .bist_addr(count), .bist_wdata(pattern),
    .mem_cs, .mem_we, .mem_addr, .mem_wdata
  );

  sram_sp #(.ADDR_W(C_SIZE), .DATA_W(DATA_W)) u_sram (
    .clk, .cs(mem_cs), .we(mem_we), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

  assign sys_rdata = mem_rdata;

endmodule
