// mbist_pkg: types shared by the MBIST controller, the address generator and
// the top level.
//
// state_t is the controller's 13-state encoding. The order (and therefore the
// 4-bit code of each state) follows the state list of the controller source
// printed with the design: s_idle=0, wdn0=1, ... rdna0=11, s_done=12. The
// waveforms published with the design show rdna0 as 4'b1011 and rdn1 as
// 4'b0100, which this order reproduces.
//
// cnt_ctrl_t is the command bundle from the controller to the address counter.
// Splitting the counter out of the controller is this design's own choice (see
// addr_gen.sv); the bundle carries exactly the counter updates that the
// controller source performs on its own count register.
package mbist_pkg;

  typedef enum logic [3:0] {
    S_IDLE = 4'd0,
    WDN0   = 4'd1,   // M1  down  w0
    RUP0   = 4'd2,   // M2  up    r0
    WUP1   = 4'd3,   // M2  up    w1
    RDN1   = 4'd4,   // M3  down  r1
    WDNA0  = 4'd5,   // M3  down  w0
    PAUSE  = 4'd6,   // M7  retention pause, no memory access
    RDN0   = 4'd7,   // M4  down  r0
    WDN1   = 4'd8,   // M4  down  w1
    RUP1   = 4'd9,   // M5  up    r1
    WUP0   = 4'd10,  // M5  up    w0
    RDNA0  = 4'd11,  // M6  down  r0
    S_DONE = 4'd12
  } state_t;

  // Address counter command, valid for one clock edge.
  //   step     : advance the counter by one (up when up=1, down otherwise)
  //   load     : load a start value instead of stepping (takes priority)
  //   load_max : value loaded is all ones (c_max) when 1, zero (c_min) when 0
  typedef struct packed {
    logic step;
    logic up;
    logic load;
    logic load_max;
  } cnt_ctrl_t;

  // Successor of a state in the test sequence (s_done returns to s_idle).
  function automatic state_t next_state(state_t s);
    return (s == S_DONE) ? S_IDLE : state_t'(s + 4'd1);
  endfunction

endpackage
