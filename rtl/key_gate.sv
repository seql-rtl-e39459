// key_gate: one XOR- or XNOR-type key gate.
//
// This is the locking element SeqL places on a flip-flop's functional
// input (FI key gate) and on its scan output (SQ key gate). With the right
// key bit it is a buffer, with the wrong one an inverter:
//   KIND = KG_XOR  : y = a ^ k       (transparent for k = 0)
//   KIND = KG_XNOR : y = ~(a ^ k)    (transparent for k = 1)
// Purely combinational; no clock. The two kinds are the paper's; the
// parameterised form is this design's.
module key_gate
  import seql_pkg::*;
#(
  parameter kg_t KIND = KG_XOR
) (
  input  logic a,   // signal being locked
  input  logic k,   // key bit
  output logic y    // locked signal
);

  always_comb y = kg_apply(KIND, a, k);

endmodule
