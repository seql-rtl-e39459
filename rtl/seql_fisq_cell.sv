// seql_fisq_cell: one locked FI-SQ pair of SeqL.
//
// The flip-flop's functional input (FI) passes an FI key gate before the
// flip-flop, and the flip-flop is a SeqL cell whose scan output (SQ) has
// its own key gate. The FI key gate lies on the functional path: a wrong
// fik inverts the value the flip-flop captures and hence the functional
// output. The SQ key gate lies only on the scan path. A scan-based attacker
// sees the pair through the XOR/XNOR chain fik ^ sqk (plus the SQ gates of
// later locked cells), so scan-correct keys with a wrong fik exist and are
// the ones a SAT attack tends to return.
//
// Ports are those of seql_ff plus the FI key bit. Timing as seql_ff: the
// (possibly inverted) FI is captured at the rising edge of ck when SE = 0.
// The gate kinds are parameters (XOR or XNOR each), as in the paper.
module seql_fisq_cell
  import seql_pkg::*;
#(
  parameter kg_t FI_KIND = KG_XOR,
  parameter kg_t SQ_KIND = KG_XOR
) (
  input  logic ck,    // clock
  input  logic se,    // scan enable
  input  logic fi,    // functional input from the combinational logic
  input  logic sd,    // scan data
  input  logic fik,   // FI key bit
  input  logic sqk,   // SQ key bit
  output logic fq,    // functional output
  output logic sq     // locked scan output
);

  logic fi_locked;    // E(FI) in the paper's notation

  key_gate #(.KIND(FI_KIND)) u_fi_kg (.a(fi), .k(fik), .y(fi_locked));

  seql_ff #(.SQ_KIND(SQ_KIND)) u_ff (
    .ck, .se, .d(fi_locked), .sd, .sqk, .fq, .sq
  );

endmodule
