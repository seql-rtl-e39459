// seql_workload_harness: drives one seql_top sized like a benchmark
// circuit and checks the key-space properties of the locking scheme on it.
//
// The combinational logic around the flip-flops is a generated model, not
// the benchmark's own netlist (which is not available here): each
// flip-flop with feedback gets a next-state function of two state bits and
// one of four primary inputs, each flip-flop without feedback a function
// of two state bits and an input. Only the flip-flop counts and the
// number of locked pairs come from the benchmark.
//
// For a key it runs NPAT scan tests (scan in random state, N = 1, 2, 5
// capture cycles, scan out) and compares every scan-out bit with a cycle
// model of the locked circuit, then compares the response with the
// oracle's (correct key) to decide scan-correctness. It also runs
// functional cycles and compares the functional outputs with the unlocked
// circuit to decide functional correctness. Keys tried:
//   * the correct key: scan- and functional-correct;
//   * keys built by the key-assignment rule (every locked cell's scan
//     path has even inversion parity) with at least one wrong FI bit:
//     scan-correct but functionally wrong, the keys a SAT attack returns;
//   * keys with only SQ bits wrong: functionally correct (isolation) but
//     scan-wrong;
//   * when 4^NLOCK <= 256, every key, counting the scan-correct ones.
// The number of scan-correct keys is 2^NLOCK when the chain holds only
// locked cells, 2^(NLOCK-1) when unlocked cells precede them (their
// scan-out passes every SQ gate, which adds one parity constraint).
module seql_workload_harness #(
  parameter int unsigned NFB   = 4,
  parameter int unsigned NWOF  = 4,
  parameter int unsigned NLOCK = 4,
  parameter int unsigned SEED  = 1,
  parameter int unsigned NPAT  = 3,
  parameter int unsigned NRULE = 3    // rule-built scan-correct keys to try
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import seql_pkg::*;

  localparam int unsigned L     = (NFB > NWOF) ? NFB : NWOF;  // shift length
  localparam int unsigned FIRST = NWOF - NLOCK;
  localparam bit EXHAUSTIVE     = (NLOCK <= 4);

  function automatic logic [NLOCK-1:0] mix(int unsigned s);
    logic [NLOCK-1:0] v;
    for (int i = 0; i < NLOCK; i++) v[i] = 1'(((s * 2654435761) >> (i + 3)) ^ (s >> i));
    return v;
  endfunction
  localparam logic [NLOCK-1:0] FI_X = mix(SEED);
  localparam logic [NLOCK-1:0] SQ_X = mix(SEED * 7 + 3);

  logic clk, se, si_fb, si_wof, so_fb, so_wof;
  logic [NFB-1:0]   fb_d, fb_q;
  logic [NWOF-1:0]  wof_d, wof_q;
  logic [NLOCK-1:0] fik, sqk;
  logic [3:0]       pi;

  seql_top #(.NFB(NFB), .NWOF(NWOF), .NLOCK(NLOCK), .FI_XNOR(FI_X), .SQ_XNOR(SQ_X)) dut (
    .clk, .se, .si_fb, .so_fb, .fb_d, .fb_q,
    .si_wof, .so_wof, .wof_d, .wof_q, .fik, .sqk
  );

  initial clk = 0;
  always #5 clk = ~clk;

  // ---- generated combinational logic ----------------------------------
  function automatic logic [NFB-1:0] next_fb(logic [NFB-1:0] q, logic [3:0] x);
    logic [NFB-1:0] r;
    for (int i = 0; i < NFB; i++)
      r[i] = q[(i * 7 + 3) % NFB] ^ (q[(i * 13 + 5) % NFB] & x[i % 4]) ^ ((i % 3 == 0) & q[i]);
    return r;
  endfunction
  function automatic logic [NWOF-1:0] next_wof(logic [NFB-1:0] q, logic [3:0] x);
    logic [NWOF-1:0] r;
    for (int i = 0; i < NWOF; i++)
      r[i] = (q[(i * 11 + 1) % NFB] & x[(i + 1) % 4]) ^ q[(i * 5 + 2) % NFB] ^ x[i % 4];
    return r;
  endfunction

  // the same functions as static wiring, so that shifting stays cheap
  for (genvar i = 0; i < NFB; i++) begin : g_fb_logic
    if (i % 3 == 0) begin : g_self
      assign fb_d[i] = fb_q[(i * 7 + 3) % NFB] ^ (fb_q[(i * 13 + 5) % NFB] & pi[i % 4]) ^ fb_q[i];
    end else begin : g_other
      assign fb_d[i] = fb_q[(i * 7 + 3) % NFB] ^ (fb_q[(i * 13 + 5) % NFB] & pi[i % 4]);
    end
  end
  for (genvar i = 0; i < NWOF; i++) begin : g_wof_logic
    assign wof_d[i] = (fb_q[(i * 11 + 1) % NFB] & pi[(i + 1) % 4]) ^ fb_q[(i * 5 + 2) % NFB] ^ pi[i % 4];
  end

  // ---- model of the locked flip-flops ------------------------------------
  logic [NFB-1:0]  m_fb;
  logic [NWOF-1:0] m_wof;

  function automatic logic sq_of(logic [NWOF-1:0] w, int i, logic [NLOCK-1:0] k);
    if (i < FIRST) return w[i];
    return w[i] ^ k[i - FIRST] ^ SQ_X[i - FIRST];
  endfunction

  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("[NFB=%0d NWOF=%0d] %0t %s: got %0b exp %0b", NFB, NWOF, $time, what, got, exp);
    end
  endtask

  task automatic shift(input logic a, b, output logic [1:0] so);
    @(negedge clk);
    se = 1; si_fb = a; si_wof = b;
    #1;
    so = {so_wof, so_fb};
    chk("so_fb", so_fb, m_fb[NFB-1]);
    chk("so_wof", so_wof, sq_of(m_wof, NWOF - 1, sqk));
    @(posedge clk);
    for (int i = NWOF - 1; i > 0; i--) m_wof[i] = sq_of(m_wof, i - 1, sqk);
    m_wof[0] = b;
    m_fb = {m_fb[NFB-2:0], a};
  endtask

  int n_capture = 0, n_multi = 0;
  task automatic capture(input logic [3:0] x);
    logic [NWOF-1:0] w;
    @(negedge clk);
    se = 0; pi = x;
    @(posedge clk);
    w = next_wof(m_fb, x);
    for (int i = 0; i < NWOF; i++)
      m_wof[i] = (i < FIRST) ? w[i] : w[i] ^ fik[i - FIRST] ^ FI_X[i - FIRST];
    m_fb = next_fb(m_fb, x);
    #1;
    checks++;
    if (fb_q !== m_fb || wof_q !== m_wof) begin
      failures++;
      if (failures < 10) $display("[NFB=%0d] capture state mismatch", NFB);
    end
    n_capture++;
  endtask

  // patterns
  logic [L-1:0]    pat_fb [NPAT], pat_wof [NPAT];
  logic [3:0]      pat_pi [NPAT][5];
  logic [2*L-1:0]  oracle [NPAT];
  localparam int NCAP [3] = '{1, 2, 5};

  // one scan test; returns the 2L scan-out bits of the unload
  task automatic scan_test(int p, output logic [2*L-1:0] resp);
    logic [1:0] so;
    for (int c = 0; c < L; c++) shift(pat_fb[p][c], pat_wof[p][c], so);
    for (int c = 0; c < NCAP[p % 3]; c++) capture(pat_pi[p][c]);
    if (NCAP[p % 3] > 1) n_multi++;
    for (int c = 0; c < L; c++) begin
      shift(1'b0, 1'b0, so);
      resp[2*c +: 2] = so;
    end
  endtask

  // functional run from pattern 0's state; 1 = matches the unlocked circuit
  task automatic functional(output logic ok);
    logic [1:0] so;
    logic [NFB-1:0] g;
    logic [NWOF-1:0] gw;
    for (int c = 0; c < L; c++) shift(pat_fb[0][c], pat_wof[0][c], so);
    g = m_fb;
    ok = 1;
    for (int t = 0; t < 6; t++) begin
      capture(pat_pi[t % NPAT][t % 5]);
      gw = next_wof(g, pat_pi[t % NPAT][t % 5]);
      g  = next_fb(g, pat_pi[t % NPAT][t % 5]);
      if (wof_q != gw || fb_q != g) ok = 0;
    end
  endtask

  task automatic try_key(input logic [NLOCK-1:0] f, s, output logic scan_ok, func_ok);
    logic [2*L-1:0] r;
    fik = f; sqk = s;
    scan_ok = 1;
    for (int p = 0; p < NPAT; p++) begin
      scan_test(p, r);
      if (r != oracle[p]) scan_ok = 0;
    end
    functional(func_ok);
  endtask

  // correct key bits
  localparam logic [NLOCK-1:0] FIK_OK = FI_X;
  localparam logic [NLOCK-1:0] SQK_OK = SQ_X;

  // scan-correct key from free SQ parities t (bit j: SQ gate j inverts)
  function automatic void rule_key(logic [NLOCK-1:0] t, output logic [NLOCK-1:0] f, s);
    logic acc;
    acc = 0;
    for (int j = NLOCK - 1; j >= 0; j--) begin
      acc ^= t[j];                    // parity of SQ gates j .. NLOCK-1
      s[j] = t[j] ^ SQ_X[j];
      f[j] = acc ^ FI_X[j];           // FI inversion must cancel it
    end
  endfunction

  int n_scan_ok = 0, n_func_ok = 0, n_both = 0, n_corrupt = 0, n_isolated = 0;

  initial begin
    logic so_ok, fn_ok;
    logic [NLOCK-1:0] f, s, t;
    logic [1:0] so;
    done = 0; checks = 0; failures = 0;
    se = 1; si_fb = 0; si_wof = 0; pi = 0;
    fik = FIK_OK; sqk = SQK_OK;
    void'($urandom(SEED));
    for (int p = 0; p < NPAT; p++) begin
      for (int c = 0; c < L; c++) begin
        pat_fb[p][c] = 1'($urandom); pat_wof[p][c] = 1'($urandom);
      end
      for (int c = 0; c < 5; c++) pat_pi[p][c] = 4'($urandom);
    end
    // flush: bring the hardware into a known state, then copy it
    for (int c = 0; c < L + 1; c++) begin
      @(negedge clk); se = 1; si_fb = 0; si_wof = 0;
      @(posedge clk);
    end
    #1;
    m_fb = fb_q; m_wof = wof_q;
    for (int c = 0; c < L; c++) shift(1'b0, 1'b0, so);

    // oracle
    for (int p = 0; p < NPAT; p++) scan_test(p, oracle[p]);
    try_key(FIK_OK, SQK_OK, so_ok, fn_ok);
    chk("correct key scan-correct", so_ok, 1'b1);
    chk("correct key functional", fn_ok, 1'b1);

    if (EXHAUSTIVE) begin
      for (int k = 0; k < (1 << (2 * NLOCK)); k++) begin
        {f, s} = (2*NLOCK)'(k);
        try_key(f, s, so_ok, fn_ok);
        n_scan_ok += int'(so_ok);
        n_func_ok += int'(fn_ok);
        n_both    += int'(so_ok && fn_ok);
        // functional correctness depends on the FI key alone
        chk("func iff fik correct", fn_ok, 1'(f == FIK_OK));
      end
      chk("scan-correct key count",
          1'(n_scan_ok == ((FIRST == 0) ? (1 << NLOCK) : (1 << (NLOCK - 1)))), 1'b1);
      chk("functional key count", 1'(n_func_ok == (1 << NLOCK)), 1'b1);
      chk("one key both correct", 1'(n_both == 1), 1'b1);
      $display("[NFB=%0d NWOF=%0d NLOCK=%0d] keys: %0d scan-correct, %0d functional-correct, %0d both",
               NFB, NWOF, NLOCK, n_scan_ok, n_func_ok, n_both);
    end else begin
      // rule-built scan-correct keys with a wrong FI bit
      for (int r = 0; r < NRULE; r++) begin
        do begin
          t = NLOCK'($urandom);
          if (FIRST != 0 && ^t) t[0] = ~t[0];   // head cells: even total parity
          rule_key(t, f, s);
        end while (f == FIK_OK);
        try_key(f, s, so_ok, fn_ok);
        chk("rule key scan-correct", so_ok, 1'b1);
        chk("rule key functionally wrong", fn_ok, 1'b0);
        if (so_ok && !fn_ok) n_corrupt++;
      end
      // only SQ bits wrong
      s = SQK_OK ^ (NLOCK'(1) << ($urandom % NLOCK));
      try_key(FIK_OK, s, so_ok, fn_ok);
      chk("sq-only key scan-wrong", so_ok, 1'b0);
      chk("sq-only key functional", fn_ok, 1'b1);
      if (!so_ok && fn_ok) n_isolated++;
      chk("hidden keys found", 1'(n_corrupt > 0), 1'b1);
    end
    chk("multi-cycle capture seen", 1'(n_multi > 0), 1'b1);
    $display("[NFB=%0d NWOF=%0d NLOCK=%0d] captures=%0d multi-cycle tests=%0d scan-correct/functionally-wrong keys=%0d",
             NFB, NWOF, NLOCK, n_capture, n_multi, n_corrupt);
    done = 1;
  end
endmodule
