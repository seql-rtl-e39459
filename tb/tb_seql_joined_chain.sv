// tb_seql_joined_chain: the worked example with both groups on one scan
// chain (SI -> FF1 -> FF2 -> FF3 -> FF4 -> SO), as the example is drawn.
// FF1 and FF2 now scan out through both SQ gates, so besides the per-pair
// conditions fik1 ^ sqk1' = 0 and fik0 ^ sqk0 ^ sqk1' = 0 a scan-correct
// key needs sqk0 ^ sqk1' = 0. Only {fik1,sqk1',fik0,sqk0} = 0000 and 1101
// remain scan-correct (against 0000, 0011, 1101, 1110 with separate
// chains); 0000 is still the only functionally correct one.
// Logic model as in tb_seql_top.
module tb_seql_joined_chain;
  logic       clk, se, si, so, so_fb_unused, si_wof_unused;
  logic [1:0] fb_d, fb_q, wof_d, wof_q, fik, sqk;
  logic       g0, g1;
  int checks = 0, failures = 0, n_mismatch = 0;

  seql_top #(.JOIN_CHAINS(1'b1)) dut (
    .clk, .se, .si_fb(si), .so_fb(so_fb_unused), .fb_d, .fb_q,
    .si_wof(si_wof_unused), .so_wof(so), .wof_d, .wof_q, .fik, .sqk
  );

  function automatic logic [3:0] comb(logic a, logic b, logic g3, logic g5);
    return {g3 ^ g5 ^ a, (g3 & b) | (g5 & ~a), b | (g3 ^ g5), a ^ (g3 & g5)};
  endfunction

  always_comb {wof_d, fb_d} = comb(g0, g1, fb_q[0], fb_q[1]);

  initial clk = 0;
  always #5 clk = ~clk;

  // model: c[0..3] = FF1..FF4
  logic [3:0] c;
  function automatic logic sq(int i);
    case (i)
      2:       return c[2] ^ sqk[0];          // XOR SQ gate, pair 0
      3:       return ~(c[3] ^ sqk[1]);       // XNOR SQ gate, pair 1
      default: return c[i];
    endcase
  endfunction

  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%0t %s: got %0b expected %0b", $time, what, got, exp);
    end
  endtask

  task automatic shift(input logic b, output logic o);
    @(negedge clk); se = 1; si = b;
    #1; o = so;
    chk("so", so, sq(3));
    @(posedge clk);
    c = {sq(2), sq(1), sq(0), b};
  endtask

  task automatic capture(input logic a, b);
    logic [3:0] g;
    @(negedge clk); se = 0; g0 = a; g1 = b;
    @(posedge clk);
    g = comb(a, b, c[0], c[1]);
    c = {g[3] ^ fik[1], g[2] ^ fik[0], g[1:0]};
    #1;
    chk("state", 1'({wof_q, fb_q} == c), 1'b1);
  endtask

  task automatic scan_test(input logic [5:0] p, output logic [3:0] r);
    logic o;
    for (int i = 3; i >= 0; i--) shift(p[i], o);
    capture(p[4], p[5]);
    for (int i = 0; i < 4; i++) begin shift(1'b0, o); r[i] = o; end
  endtask

  logic [3:0]  oracle [64];
  logic [15:0] scan_ok;
  localparam logic [15:0] EXPECTED = (16'b1 << 4'b0000) | (16'b1 << 4'b1101);

  initial begin
    logic [3:0] r, k;
    logic o;
    se = 1; si = 0; g0 = 0; g1 = 0; si_wof_unused = 0;
    fik = 2'b00; sqk = 2'b10;
    repeat (5) @(posedge clk);
    #1; c = {wof_q, fb_q};
    for (int p = 0; p < 64; p++) scan_test(6'(p), oracle[p]);
    for (int row = 0; row < 16; row++) begin
      #1;                               // change the key between edges
      k = 4'(row);                      // {fik1, sqk1', fik0, sqk0}
      fik = {k[3], k[1]}; sqk = {~k[2], k[0]};
      scan_ok[row] = 1;
      for (int p = 0; p < 64; p++) begin
        scan_test(6'(p), r);
        if (r != oracle[p]) begin scan_ok[row] = 0; n_mismatch++; end
      end
      chk($sformatf("scan-correct %4b", k), scan_ok[row], EXPECTED[row]);
    end
    shift(1'b0, o);
    $display("scan-correct keys with one chain: %b (bit = key {fik1,sqk1',fik0,sqk0})", scan_ok);
    chk("scan mismatches seen", 1'(n_mismatch > 0), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
