// seql_pkg: types and helpers shared by the SeqL scan-locking blocks.
//
// A key gate is either XOR-type or XNOR-type. An XOR-type gate passes its
// input unchanged when the key bit is 0; an XNOR-type gate passes it when
// the key bit is 1. Both kinds appear in the scheme: the four combinations
// of FI-gate and SQ-gate kind give the four cell labels 00, 01, 10, 11 used
// in the key-assignment analysis.
package seql_pkg;

  typedef enum logic {
    KG_XOR  = 1'b0,   // y = a ^ k      (correct key bit 0)
    KG_XNOR = 1'b1    // y = ~(a ^ k)   (correct key bit 1)
  } kg_t;

  // Output of a key gate of the given kind.
  function automatic logic kg_apply(kg_t kind, logic a, logic k);
    return a ^ k ^ logic'(kind);
  endfunction

  // The key bit that makes a gate of the given kind transparent.
  function automatic logic kg_correct_key(kg_t kind);
    return logic'(kind);
  endfunction

endpackage
