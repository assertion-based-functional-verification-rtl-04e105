// addr_gen: address generator of the MBIST datapath, an up/down counter over
// the whole address space (2**C_SIZE words).
//
// On each rising clock edge, in priority order:
//   load  -> count becomes c_max (all ones) if load_max, else c_min (zero);
//   step  -> count moves by one, up if up=1, else down (wrapping modulo
//            2**C_SIZE);
//   else  -> count holds.
// rst is asynchronous and clears the counter. The commands come from the
// MBIST controller (mbist_ctrl), which starts every march pass at c_min or
// c_max and lets the counter run to the other end. The count is used directly
// (combinationally) as the memory address in the same cycle.
//
// The design places the address counter in the address generator, started by
// the controller's en and run up or down per march element; the load/step
// command encoding is this design's own.
module addr_gen
  import mbist_pkg::*;
#(
  parameter int unsigned C_SIZE = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  cnt_ctrl_t         cnt_ctrl,
  output logic [C_SIZE-1:0] count
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst)
      count <= '0;
    else if (cnt_ctrl.load)
      count <= cnt_ctrl.load_max ? '1 : '0;
    else if (cnt_ctrl.step)
      count <= cnt_ctrl.up ? count + 1'b1 : count - 1'b1;
  end

endmodule
