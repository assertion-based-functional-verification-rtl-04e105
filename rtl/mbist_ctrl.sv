// mbist_ctrl: hardwired (FSM) MBIST controller for a March C test extended by
// a retention pause.
//
// Test sequence (one state per pass over the address space):
//   wdn0  -> rup0 -> wup1 -> rdn1 -> wdna0 -> pause -> rdn0 -> wdn1 -> rup1
//   -> wup0 -> rdna0 -> s_done
// "r"/"w" is a read or write pass, "up"/"dn" the address direction and the
// digit the data value. Every march and pause state lasts exactly 2**C_SIZE
// clocks: it starts at c_min (up) or c_max (down) and moves to the next state
// on the clock at which the counter reaches c_max (up) or c_min (down). A full
// test therefore takes 1 + 11 * 2**C_SIZE clocks from the first clock that sees
// t_mode high in s_idle to the clock that enters s_done (2817 for C_SIZE=8).
// The pause state makes no memory access: it only lets one full counter sweep
// pass between the last write of 0s (wdna0) and the following read of 0s
// (rdn0), so that cells that lose their data are caught (retention faults).
//
// Interface and timing
//   * rst is asynchronous and active high; it returns the FSM to s_idle with
//     en=0, done=0, pass=1, fail=0, rw=1 (read), g_patt=1.
//   * In s_idle a high t_mode starts the test on the next clock: en rises in
//     the same clock edge that enters wdn0 (en is high one cycle after t_mode).
//   * en, rw and g_patt are registered and change only on state transitions.
//     rw=1 reads, rw=0 writes; g_patt is the data value of the pass (0/1).
//     hold is high in the pause state and tells the read/write generator to
//     leave the memory alone.
//   * In read states match is sampled every clock; one clock later pass/fail
//     show the result of that read (pass=1,fail=0 on match, else the reverse).
//     pass/fail are per-read, not sticky, as in the published controller.
//   * The address counter lives in addr_gen; the controller reads it back on
//     count and drives cnt_ctrl (combinational from state, count and t_mode).
//   * done is set on the clock that enters s_done; the FSM stays in s_done
//     while t_mode is high and returns to s_idle when it drops.
//
// Follows the published controller: state list and encoding, the order of
// passes and their directions, the register updates in each state (en, rw,
// g_patt, pass, fail, done), the counter start values on every transition,
// the reset values, and the pause length of one counter sweep.
// Own choices, where the published controller is silent or inconsistent: the
// counter is a separate block (addr_gen) steered through cnt_ctrl; t_mode
// falling in the middle of a test aborts to s_idle; done is cleared when
// s_done is left; the hold output marks the pause state; the unused
// signature/mem_out inputs are not ports here (comparison is in sig_analyzer).
module mbist_ctrl
  import mbist_pkg::*;
#(
  parameter int unsigned C_SIZE = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              t_mode,
  input  logic              match,
  input  logic [C_SIZE-1:0] count,
  output cnt_ctrl_t         cnt_ctrl,
  output logic              en,
  output logic              rw,
  output logic              g_patt,
  output logic              hold,
  output state_t            state,
  output logic              done,
  output logic              pass,
  output logic              fail
);

  localparam logic [C_SIZE-1:0] C_MIN = '0;
  localparam logic [C_SIZE-1:0] C_MAX = '1;

  logic at_min, at_max;
  assign at_min = (count == C_MIN);
  assign at_max = (count == C_MAX);

  // States that read the memory and grade the read with match.
  logic read_state;
  assign read_state = (state == RUP0) || (state == RDN1) || (state == RDN0) ||
                      (state == RUP1) || (state == RDNA0);

  // States that sweep the address counter.
  logic sweep_state;
  assign sweep_state = (state != S_IDLE) && (state != S_DONE);

  assign hold = (state == PAUSE);

  // ---------------------------------------------------------------------------
  // Address counter commands: the counter steps in the pass direction and is
  // loaded with the start value of the next pass on the last clock of a pass.
  // ---------------------------------------------------------------------------
  always_comb begin
    cnt_ctrl = '0;
    if (state == S_IDLE) begin
      if (t_mode) begin
        cnt_ctrl.load     = 1'b1;
        cnt_ctrl.load_max = 1'b1;
      end
    end else if (sweep_state && t_mode) begin
      cnt_ctrl.step = 1'b1;
      cnt_ctrl.up   = (state == RUP0) || (state == WUP1) || (state == PAUSE) ||
                      (state == RUP1) || (state == WUP0);
      case (state)
        WDN0:  begin cnt_ctrl.load = at_min; cnt_ctrl.load_max = 1'b0; end
        RUP0:  begin cnt_ctrl.load = at_max; cnt_ctrl.load_max = 1'b0; end
        WUP1:  begin cnt_ctrl.load = at_max; cnt_ctrl.load_max = 1'b1; end
        RDN1:  begin cnt_ctrl.load = at_min; cnt_ctrl.load_max = 1'b1; end
        WDNA0: begin cnt_ctrl.load = at_min; cnt_ctrl.load_max = 1'b0; end
        PAUSE: begin cnt_ctrl.load = at_max; cnt_ctrl.load_max = 1'b1; end
        RDN0:  begin cnt_ctrl.load = at_min; cnt_ctrl.load_max = 1'b1; end
        WDN1:  begin cnt_ctrl.load = at_min; cnt_ctrl.load_max = 1'b0; end
        RUP1:  begin cnt_ctrl.load = at_max; cnt_ctrl.load_max = 1'b0; end
        WUP0:  begin cnt_ctrl.load = at_max; cnt_ctrl.load_max = 1'b1; end
        // rdna0 ends by stepping down from c_min, which wraps to c_max.
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------------------
  // State register and registered control outputs.
  // ---------------------------------------------------------------------------
  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state  <= S_IDLE;
      en     <= 1'b0;
      done   <= 1'b0;
      fail   <= 1'b0;
      pass   <= 1'b1;
      g_patt <= 1'b1;
      rw     <= 1'b1;
    end else if (sweep_state && !t_mode) begin
      // Test request withdrawn in the middle of a test: abort.
      state <= S_IDLE;
      en    <= 1'b0;
      rw    <= 1'b1;
    end else begin
      if (read_state) begin
        pass <= match;
        fail <= !match;
      end
      case (state)
        S_IDLE: if (t_mode) begin
          state  <= WDN0;
          en     <= 1'b1;
          rw     <= 1'b0;
          g_patt <= 1'b0;
        end
        WDN0:  if (at_min) begin state <= RUP0;  rw <= 1'b1; end
        RUP0:  if (at_max) begin state <= WUP1;  rw <= 1'b0; g_patt <= 1'b1; end
        WUP1:  if (at_max) begin state <= RDN1;  rw <= 1'b1; end
        RDN1:  if (at_min) begin state <= WDNA0; rw <= 1'b0; g_patt <= 1'b0; end
        WDNA0: if (at_min) begin state <= PAUSE; end
        PAUSE: if (at_max) begin state <= RDN0;  rw <= 1'b1; end
        RDN0:  if (at_min) begin state <= WDN1;  rw <= 1'b0; g_patt <= 1'b1; end
        WDN1:  if (at_min) begin state <= RUP1;  rw <= 1'b1; end
        RUP1:  if (at_max) begin state <= WUP0;  rw <= 1'b0; g_patt <= 1'b0; end
        WUP0:  if (at_max) begin state <= RDNA0; rw <= 1'b1; end
        RDNA0: if (at_min) begin state <= S_DONE; done <= 1'b1; en <= 1'b0; end
        S_DONE: if (!t_mode) begin state <= S_IDLE; done <= 1'b0; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------------
  // Embedded checks, drawn from the properties written for this controller.
  // They are stated so that they also hold while rst is applied.
  // ---------------------------------------------------------------------------
  // en low in s_idle, high in every march and pause state.
  a_en_idle:  assert property (@(posedge clk) (state == S_IDLE) |-> !en);
  a_en_march: assert property (@(posedge clk) sweep_state |-> en);
  // wdn0 writes zeros.
  a_f_wdn0:   assert property (@(posedge clk) (state == WDN0) |-> !(rw || g_patt));
  // pass and fail are never high together.
  a_pass_fail: assert property (@(posedge clk) !(pass && fail));
  // The pause keeps the write direction and data of wdna0 and is marked by hold.
  a_pause:    assert property (@(posedge clk) (state == PAUSE) |-> (hold && !rw && !g_patt));
  // Per-state outputs: reads with rw=1, writes with rw=0 and the pass's data.
  a_rw_read:  assert property (@(posedge clk) read_state |-> (rw && en));
  a_rw_write: assert property (@(posedge clk)
                (state == WDN0 || state == WUP1 || state == WDNA0 || state == WDN1 ||
                 state == WUP0) |-> (!rw && en && (g_patt == (state == WUP1 || state == WDN1))));
  // Each pass starts at c_min (up passes and the pause) or c_max (down passes).
  a_start_up: assert property (@(posedge clk) (state != $past(state) &&
                (state == RUP0 || state == WUP1 || state == PAUSE || state == RUP1 ||
                 state == WUP0)) |-> at_min);
  a_start_dn: assert property (@(posedge clk) (state != $past(state) &&
                (state == WDN0 || state == RDN1 || state == WDNA0 || state == RDN0 ||
                 state == WDN1 || state == RDNA0)) |-> at_max);
  // Every state change goes to the next state of the sequence or back to s_idle.
  a_legal:    assert property (@(posedge clk) (state != $past(state)) |->
                (state == S_IDLE || state == next_state($past(state))));

endmodule
