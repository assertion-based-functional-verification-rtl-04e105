// rw_gen: read/write generator of the MBIST datapath.
//
// Decodes the controller's rw (1 = read, 0 = write), en and hold (pause) into
// single-port memory strobes for the current cycle:
//   cs = en & !hold        memory selected in every march pass cycle
//   we = cs & !rw          write pass
//   rd = cs &  rw          read pass; also tells the analyzer to compare
// The pause element must not touch the memory, so hold masks every access.
// Purely combinational; the memory writes on the next clock edge and reads
// asynchronously within the cycle.
//
// The meaning of rw follows the published controller (a high rw enables the
// read operation); the strobe names and the hold input are this design's.
module rw_gen (
  input  logic en,
  input  logic rw,
  input  logic hold,
  output logic cs,
  output logic we,
  output logic rd
);

  assign cs = en & ~hold;
  assign we = cs & ~rw;
  assign rd = cs & rw;

endmodule
