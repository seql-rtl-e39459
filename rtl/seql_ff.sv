// seql_ff: functionally isolated scan-locked flip-flop (SeqL flip-flop).
//
// The cell has two outputs. FQ is the functional output, taken straight
// from the slave latch, with no key gate on it, so the SQ key has no effect
// on normal operation ("functional isolation"). SQ is the scan output: the
// stored bit passes a transmission gate controlled by SE and then the SQ
// key gate (XOR or XNOR, parameter SQ_KIND). A scan chain therefore sees
// the stored bit inverted unless sqk is the correct key bit.
//
// The transmission gate stops SQ from toggling during functional
// operation (SE = 0), saving energy per toggle. In RTL it is a latch that
// is transparent while SE = 1 and holds its last value while SE = 0; that
// latch is intended and is the reason for the latch warning on this file.
//
// Front end: 2:1 mux, D when SE = 0, SD when SE = 1, into a positive-edge
// master-slave flip-flop (CKB/CK1 clocked transmission gates in the
// transistor schematic). No reset, like the standard scan flip-flop it is
// built from.
//
// Timing: FQ changes at the rising edge of ck. With SE = 1, SQ follows the
// stored bit combinationally (through the open gate), so the next cell of
// the chain samples it at the following edge, exactly as with a plain scan
// flip-flop. Everything above is the paper's cell; the latch model of the
// transmission gate and the absence of a reset are this design's choices.
module seql_ff
  import seql_pkg::*;
#(
  parameter kg_t SQ_KIND = KG_XOR
) (
  input  logic ck,    // clock
  input  logic se,    // scan enable
  input  logic d,     // functional data
  input  logic sd,    // scan data
  input  logic sqk,   // SQ key bit
  output logic fq,    // functional output, never locked
  output logic sq     // scan output, locked by sqk
);

  logic q;          // slave latch output (QB node of the schematic, buffered)
  logic q_tg;       // node behind the SE transmission gate

  always_ff @(posedge ck) q <= se ? sd : d;

  assign fq = q;

  // SE transmission gate: passes q while shifting, isolates the key gate
  // (which then keeps its input) during functional operation.
  always_latch if (se) q_tg = q;

  key_gate #(.KIND(SQ_KIND)) u_sq_kg (.a(q_tg), .k(sqk), .y(sq));

  // With SE low and a steady key, the scan output must not toggle.
  property p_sq_quiet;
    @(posedge ck) (!se && $past(!se) && $stable(sqk)) |-> $stable(sq);
  endproperty
  a_sq_quiet: assert property (p_sq_quiet);

endmodule
