// march_ref_pkg: reference description of the March C + pause test, written
// independently of the controller RTL, for use by the testbenches.
//
// The test is a list of 11 passes over an N-word memory, each lasting N
// clocks. pass_of(p) gives pass p (0..10): its FSM state, address direction,
// whether it reads, writes or does neither (pause), and its data value.
// addr_of(ps, i, n) gives the address visited at step i of pass ps over an
// n-word memory.
package march_ref_pkg;
  import mbist_pkg::*;

  typedef struct packed {
    state_t st;
    bit     up;
    bit     rd;
    bit     wr;
    bit     data;
  } pass_t;

  localparam int NUM_PASSES = 11;

  function automatic pass_t pass_of(int p);
    case (p)
      0:  return '{WDN0,  1'b0, 1'b0, 1'b1, 1'b0};
      1:  return '{RUP0,  1'b1, 1'b1, 1'b0, 1'b0};
      2:  return '{WUP1,  1'b1, 1'b0, 1'b1, 1'b1};
      3:  return '{RDN1,  1'b0, 1'b1, 1'b0, 1'b1};
      4:  return '{WDNA0, 1'b0, 1'b0, 1'b1, 1'b0};
      5:  return '{PAUSE, 1'b1, 1'b0, 1'b0, 1'b0};
      6:  return '{RDN0,  1'b0, 1'b1, 1'b0, 1'b0};
      7:  return '{WDN1,  1'b0, 1'b0, 1'b1, 1'b1};
      8:  return '{RUP1,  1'b1, 1'b1, 1'b0, 1'b1};
      9:  return '{WUP0,  1'b1, 1'b0, 1'b1, 1'b0};
      default: return '{RDNA0, 1'b0, 1'b1, 1'b0, 1'b0};
    endcase
  endfunction

  // Address visited at step i of a pass over n words.
  function automatic int addr_of(pass_t ps, int i, int n);
    return ps.up ? i : n - 1 - i;
  endfunction

endpackage
