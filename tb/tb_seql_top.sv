// tb_seql_top: end-to-end test of the default (worked-example) configuration:
// flip-flops 1, 2 with feedback, flip-flops 3, 4 without feedback and
// locked, FI gates XOR/XOR, SQ gates XOR (pair 0) and XNOR (pair 1).
//
// The combinational logic around the flip-flops is a small model written
// here (the scheme does not depend on it):
//   G2 = G0 ^ (G3 & G5)          next state of FF1 (output G3)
//   G4 = G1 | (G3 ^ G5)          next state of FF2 (output G5)
//   G6 = (G3 & G1) | (G5 & ~G0)  input of FF3 (output G7, primary output)
//   G8 = G3 ^ G5 ^ G0            input of FF4 (output G9, primary output)
//
// For each of the 16 keys {fik1, sqk1', fik0, sqk0} (sqk1' = 0 is the
// correct value of the XNOR-type sqk1) the test
//   1. runs every scan test (all scan-in states x all inputs) with N = 1, 2
//      and 5 capture cycles and compares the scan-out stream with the
//      oracle, i.e. the same chip with the correct key: "scan-correct";
//   2. runs functional sequences from scanned-in states and compares the
//      functional outputs with the unlocked circuit: "functional-correct";
// and checks every observed bit against a cycle model of the locked
// circuit. The two resulting columns must equal the truth table of the
// scheme (4 scan-correct keys, 4 functional-correct keys, 1 in both, so
// 3 of 4 scan-correct keys are functionally wrong).
module tb_seql_top;
  import seql_pkg::*;

  logic       clk, se, si_fb, si_wof, so_fb, so_wof;
  logic [1:0] fb_d, fb_q, wof_d, wof_q, fik, sqk;
  logic       g0, g1;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_shift = 0, n_capture = 0, n_multicycle = 0;
  int n_func_corrupt = 0, n_scan_mismatch = 0, n_sq_only_key = 0;

  seql_top dut (
    .clk, .se, .si_fb, .so_fb, .fb_d, .fb_q,
    .si_wof, .so_wof, .wof_d, .wof_q, .fik, .sqk
  );

  // ---- combinational logic of the example IP (behavioural model) --------
  function automatic logic [3:0] comb(logic g0_i, logic g1_i, logic g3, logic g5);
    logic g2, g4, g6, g8;
    g2 = g0_i ^ (g3 & g5);
    g4 = g1_i | (g3 ^ g5);
    g6 = (g3 & g1_i) | (g5 & ~g0_i);
    g8 = g3 ^ g5 ^ g0_i;
    return {g8, g6, g4, g2};
  endfunction

  always_comb begin
    logic [3:0] g;
    g = comb(g0, g1, fb_q[0], fb_q[1]);
    fb_d  = g[1:0];
    wof_d = g[3:2];
  end

  initial clk = 0;
  always #5 clk = ~clk;

  // ---- cycle model of the locked circuit -----------------------------------
  logic [1:0] m_fb, m_wof;   // model state: FF1/FF2 and FF3/FF4

  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("%0t %s: got %0b expected %0b", $time, what, got, exp);
    end
  endtask

  // one shift cycle; returns the scan outputs seen before the edge
  task automatic shift(input logic in_fb, in_wof, output logic out_fb, out_wof);
    @(negedge clk);
    se = 1; si_fb = in_fb; si_wof = in_wof;
    #1;
    out_fb = so_fb; out_wof = so_wof;
    chk("so_fb", so_fb, m_fb[1]);
    chk("so_wof", so_wof, m_wof[1] ^ sqk[1] ^ 1'b1);           // XNOR gate
    @(posedge clk);
    m_fb  = {m_fb[0], in_fb};
    m_wof = {m_wof[0] ^ sqk[0], in_wof};                          // XOR gate
    n_shift++;
  endtask

  // one functional (capture) cycle with primary inputs a, b
  task automatic capture(input logic a, b);
    logic [3:0] g;
    @(negedge clk);
    se = 0; g0 = a; g1 = b;
    @(posedge clk);
    g = comb(a, b, m_fb[0], m_fb[1]);
    m_fb  = g[1:0];
    m_wof = {g[3] ^ fik[1], g[2] ^ fik[0]};
    #1;
    chk("fb_q", fb_q[0], m_fb[0]);  chk("fb_q", fb_q[1], m_fb[1]);
    chk("wof_q", wof_q[0], m_wof[0]); chk("wof_q", wof_q[1], m_wof[1]);
    n_capture++;
  endtask

  // scan test: scan in state p (fb bits [1:0], wof bits [3:2]), N captures
  // with inputs from p[5:4], scan out; returns 4 scan-out bits
  task automatic scan_test(input logic [5:0] p, input int ncap, output logic [3:0] resp);
    logic a, b, c, d;
    shift(p[1], p[3], a, b);
    shift(p[0], p[2], a, b);
    for (int c_i = 0; c_i < ncap; c_i++) capture(p[4] ^ c_i[0], p[5]);
    if (ncap > 1) n_multicycle++;
    shift(1'b0, 1'b0, a, b);
    shift(1'b0, 1'b0, c, d);
    resp = {d, c, b, a};
  endtask

  // row = {fik1, sqk1', fik0, sqk0}; returns the physical {sqk1, sqk0}
  function automatic logic [1:0] key_bits(logic [3:0] r, output logic [1:0] fik_o);
    fik_o = {r[3], r[1]};
    return {~r[2], r[0]};
  endfunction

  // truth table of the scheme for this example, bit = row {fik1,sqk1',fik0,sqk0}
  localparam logic [15:0] SCAN_CORRECT = (16'b1 << 4'b0000) | (16'b1 << 4'b0011)
                                       | (16'b1 << 4'b1101) | (16'b1 << 4'b1110);
  localparam logic [15:0] FUNC_CORRECT = (16'b1 << 4'b0000) | (16'b1 << 4'b0001)
                                       | (16'b1 << 4'b0100) | (16'b1 << 4'b0101);

  logic [3:0]  oracle [3][64];     // [N index][pattern]
  logic [1:0]  golden_out [8][12]; // unlocked circuit outputs {G9, G7}
  logic [1:0]  golden_st  [8][12];
  logic [15:0] scan_ok, func_ok;
  localparam int NCAP [3] = '{1, 2, 5};

  initial begin
    logic [3:0] resp;
    logic [1:0] fk;
    logic [1:0] kb;
    logic [3:0] g;
    logic [1:0] st;
    logic a, b;
    se = 1; si_fb = 0; si_wof = 0; g0 = 0; g1 = 0;
    fik = 2'b00; sqk = 2'b10;   // correct key
    // flush the chains so model and hardware agree
    @(negedge clk); se = 1;
    @(posedge clk); @(posedge clk); @(posedge clk);
    #1;
    m_fb = fb_q; m_wof = wof_q;

    // unlocked reference behaviour for the functional sequences
    for (int s = 0; s < 8; s++) begin
      st = 2'(s);
      for (int t = 0; t < 12; t++) begin
        a = 1'((s * 7 + t * 3) % 5 == 1); b = 1'((s + t) % 3 == 0);
        g = comb(a, b, st[0], st[1]);
        st = g[1:0];
        golden_st[s][t] = st;
        golden_out[s][t] = g[3:2];
      end
    end

    // oracle responses: chip with the correct key
    for (int n = 0; n < 3; n++)
      for (int p = 0; p < 64; p++) scan_test(6'(p), NCAP[n], oracle[n][p]);

    for (int row = 0; row < 16; row++) begin
      kb = key_bits(4'(row), fk);
      // new key between edges (the next clock edge comes from shift())
      fik = fk; sqk = kb;
      scan_ok[row] = 1'b1;
      for (int n = 0; n < 3; n++)
        for (int p = 0; p < 64; p++) begin
          scan_test(6'(p), NCAP[n], resp);
          if (resp != oracle[n][p]) begin
            scan_ok[row] = 1'b0;
            n_scan_mismatch++;
          end
        end
      // functional sequences
      func_ok[row] = 1'b1;
      for (int s = 0; s < 8; s++) begin
        logic [1:0] unused;
        st = 2'(s);
        shift(st[1], 1'b0, unused[0], unused[1]);
        shift(st[0], 1'b0, unused[0], unused[1]);
        for (int t = 0; t < 12; t++) begin
          a = 1'((s * 7 + t * 3) % 5 == 1); b = 1'((s + t) % 3 == 0);
          capture(a, b);
          if (wof_q != golden_out[s][t] || fb_q != golden_st[s][t]) begin
            func_ok[row] = 1'b0;
            n_func_corrupt++;
          end
        end
      end
      if (fk == 2'b00 && kb != 2'b10) n_sq_only_key++;
      $display("key {fik1,sqk1',fik0,sqk0}=%4b  scan-correct=%0d  functional-correct=%0d",
               4'(row), scan_ok[row], func_ok[row]);
    end

    for (int row = 0; row < 16; row++) begin
      chk($sformatf("scan-correct row %4b", 4'(row)), scan_ok[row], SCAN_CORRECT[row]);
      chk($sformatf("func-correct row %4b", 4'(row)), func_ok[row], FUNC_CORRECT[row]);
    end
    // 2^n scan-correct keys, exactly one of them functionally correct
    chk("scan-correct count = 4", 1'($countones(scan_ok) == 4), 1'b1);
    chk("both-correct count = 1", 1'($countones(scan_ok & func_ok) == 1), 1'b1);

    $display("shifts=%0d captures=%0d multi-cycle tests=%0d scan mismatches=%0d functional corruptions=%0d sq-only wrong keys=%0d",
             n_shift, n_capture, n_multicycle, n_scan_mismatch, n_func_corrupt, n_sq_only_key);
    chk("shift happened", 1'(n_shift > 0), 1'b1);
    chk("capture happened", 1'(n_capture > 0), 1'b1);
    chk("multi-cycle capture happened", 1'(n_multicycle > 0), 1'b1);
    chk("scan-out locking seen", 1'(n_scan_mismatch > 0), 1'b1);
    chk("functional corruption seen", 1'(n_func_corrupt > 0), 1'b1);
    chk("functional isolation exercised", 1'(n_sq_only_key > 0), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
