// scan_ff: plain mux-D scan flip-flop (no locking).
//
// The reference cell that the locked cells are derived from: a 2:1 mux
// picks the functional input D (SE = 0) or the scan input SD (SE = 1), and a
// positive-edge master-slave flip-flop stores it. The single output Q feeds
// both the logic and the next cell of the scan chain. Used for flip-flops
// that are not locked, such as flip-flops with feedback, which SeqL leaves
// alone.
//
// Timing: Q takes the selected input at the rising edge of ck. There is no
// reset, as in a standard-cell scan flip-flop; the state is loaded by a
// capture or a scan shift. The mux labelling (D on 0, SD on 1, select SE)
// is the scheme's; the edge and the absence of a reset are this design's
// choices.
module scan_ff (
  input  logic ck,   // clock
  input  logic se,   // scan enable: 1 = shift, 0 = functional capture
  input  logic d,    // functional data
  input  logic sd,   // scan data (from the previous cell's scan output)
  output logic q     // output to logic and scan chain
);

  always_ff @(posedge ck) q <= se ? sd : d;

endmodule
