// seql_top: the SeqL scan-locked flip-flop boundary of an IP block.
//
// SeqL protects a sequential IP whose only test access is its scan chains.
// The combinational logic of the IP is not part of this module: its
// flip-flop inputs arrive on fb_d/wof_d and the flip-flop outputs leave on
// fb_q/wof_q, so any netlist can be wrapped. The flip-flops come in two
// groups, each stitched as its own scan chain:
//
//   * NFB flip-flops with feedback (their output reaches their own input
//     through the logic). They are never locked, since locking them would
//     expose the key to multi-cycle tests. Chain: si_fb -> fb[0] -> ... ->
//     fb[NFB-1] -> so_fb.
//   * NWOF flip-flops without feedback (the set R_wof, e.g. the input and
//     output registers around the logic). Chain: si_wof -> wof[0] -> ... ->
//     wof[NWOF-1] -> so_wof. The last NLOCK of them, those nearest the scan
//     output, are locked FI-SQ pairs (seql_fisq_cell). Locked pair j sits at
//     wof[NWOF-NLOCK+j], so pair 0 is the farthest from so_wof.
//
// Key: fik[j] and sqk[j] drive the FI and SQ key gates of pair j. Bit j of
// FI_XNOR / SQ_XNOR selects an XNOR-type gate (correct key bit 1) instead
// of an XOR-type one (correct key bit 0). The key bits are meant to come
// straight from a tamper-proof key store, which is outside this module.
//
// Behaviour: se = 0 is a functional clock (capture); se = 1 shifts both
// chains one place per rising clk edge. Functional outputs depend only on
// the fik bits: a wrong fik[j] inverts what pair j captures. Scan-out
// values depend on fik and on every sqk gate between a cell and so_wof, so
// a key can be correct for scan and still wrong in function.
//
// JOIN_CHAINS = 1 stitches both groups into one chain, si_fb -> fb -> wof
// -> so_wof, as the worked example is drawn. The values of the feedback
// flip-flops then also scan out through every SQ gate, which adds one
// parity constraint on the key and halves the scan-correct key space; the
// default keeps the chains apart, as in the benchmark setup.
//
// Defaults reproduce the paper's worked example (two flip-flops with
// feedback, two locked flip-flops without feedback, FI gates XOR/XOR, SQ
// gates XOR for pair 0 and XNOR for pair 1). Separate chains for the two
// groups follow the paper's benchmark setup; one chain per group and the
// port-level split of the logic are this design's choices.
module seql_top
  import seql_pkg::*;
#(
  parameter int unsigned      NFB     = 2,      // flip-flops with feedback
  parameter int unsigned      NWOF    = 2,      // flip-flops without feedback
  parameter int unsigned      NLOCK   = 2,      // locked FI-SQ pairs (<= NWOF)
  parameter logic [NLOCK-1:0] FI_XNOR = '0,     // FI gate kind per pair
  parameter logic [NLOCK-1:0] SQ_XNOR = 2'b10,  // SQ gate kind per pair
  parameter bit               JOIN_CHAINS = 1'b0 // 1: one chain, fb then wof
) (
  input  logic             clk,
  input  logic             se,       // scan enable, common to both chains
  // chain of flip-flops with feedback
  input  logic             si_fb,
  output logic             so_fb,
  input  logic [NFB-1:0]   fb_d,     // next-state inputs from the logic
  output logic [NFB-1:0]   fb_q,     // state outputs to the logic
  // chain of flip-flops without feedback (R_wof), locked at its end
  input  logic             si_wof,
  output logic             so_wof,
  input  logic [NWOF-1:0]  wof_d,    // FI inputs from the logic / inputs
  output logic [NWOF-1:0]  wof_q,    // functional outputs
  // key from the tamper-proof store
  input  logic [NLOCK-1:0] fik,
  input  logic [NLOCK-1:0] sqk
);

  localparam int unsigned FIRST_LOCK = NWOF - NLOCK;

  if (NLOCK > NWOF || NLOCK == 0 || NFB == 0) begin : g_bad_params
    $error("seql_top: need 1 <= NLOCK <= NWOF and NFB >= 1");
  end

  // ---- flip-flops with feedback: plain scan chain -----------------------
  logic [NFB:0] fb_chain;
  assign fb_chain[0] = si_fb;

  for (genvar i = 0; i < NFB; i++) begin : g_fb
    scan_ff u_ff (
      .ck(clk), .se, .d(fb_d[i]), .sd(fb_chain[i]), .q(fb_q[i])
    );
    assign fb_chain[i+1] = fb_q[i];
  end

  assign so_fb = fb_chain[NFB];

  // ---- flip-flops without feedback: unlocked head, locked tail ------------
  logic [NWOF:0] wof_chain;
  // With JOIN_CHAINS the feedback chain feeds the R_wof chain (si_wof is
  // then unused and so_fb is an intermediate tap).
  assign wof_chain[0] = JOIN_CHAINS ? fb_chain[NFB] : si_wof;

  for (genvar i = 0; i < NWOF; i++) begin : g_wof
    if (i < FIRST_LOCK) begin : g_plain
      scan_ff u_ff (
        .ck(clk), .se, .d(wof_d[i]), .sd(wof_chain[i]), .q(wof_q[i])
      );
      assign wof_chain[i+1] = wof_q[i];
    end else begin : g_locked
      localparam int unsigned J = i - FIRST_LOCK;
      seql_fisq_cell #(
        .FI_KIND(kg_t'(FI_XNOR[J])),
        .SQ_KIND(kg_t'(SQ_XNOR[J]))
      ) u_cell (
        .ck(clk), .se, .fi(wof_d[i]), .sd(wof_chain[i]),
        .fik(fik[J]), .sqk(sqk[J]),
        .fq(wof_q[i]), .sq(wof_chain[i+1])
      );
    end
  end

  assign so_wof = wof_chain[NWOF];

endmodule
