// tb_seql_ff: checks the SeqL flip-flop in both SQ-gate kinds.
//   * FQ always equals the captured bit, whatever the key (functional
//     isolation).
//   * While SE = 1, SQ = stored bit through the SQ key gate.
//   * While SE = 0, SQ keeps the value the transmission gate last passed,
//     so it does not toggle during functional operation.
module tb_seql_ff;
  import seql_pkg::*;

  logic ck, se, d, sd;
  logic [1:0] sqk, fq, sq;
  int checks = 0, failures = 0;
  int n_shift = 0, n_capture = 0, n_sq_hold = 0;

  seql_ff #(.SQ_KIND(KG_XOR))  u0 (.ck, .se, .d, .sd, .sqk(sqk[0]), .fq(fq[0]), .sq(sq[0]));
  seql_ff #(.SQ_KIND(KG_XNOR)) u1 (.ck, .se, .d, .sd, .sqk(sqk[1]), .fq(fq[1]), .sq(sq[1]));

  initial ck = 0;
  always #5 ck = ~ck;

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%0t %s: got %0b expected %0b", $time, what, got, exp);
    end
  endtask

  initial begin
    logic stored;
    logic [1:0] tg;        // value behind the transmission gate, per cell
    // start in shift mode so the gate node is defined
    se = 1; d = 0; sd = 0; sqk = 2'b00;
    @(posedge ck); #1;
    stored = 0; tg = 2'b00;
    for (int i = 0; i < 600; i++) begin
      @(negedge ck);
      // keep SE in runs so both modes last several cycles
      if ($urandom_range(3) == 0) se = ~se;
      d = 1'($urandom); sd = 1'($urandom);
      if ($urandom_range(15) == 0) sqk = 2'($urandom);
      if (se) n_shift++; else n_capture++;
      #1;
      if (se) tg = {stored, stored};
      // before the edge: outputs of the previous state
      check("sq0 pre", sq[0], tg[0] ^ sqk[0]);
      check("sq1 pre", sq[1], ~(tg[1] ^ sqk[1]));
      stored = se ? sd : d;
      @(posedge ck); #1;
      if (se) tg = {stored, stored};
      else if (tg[0] != stored) n_sq_hold++;
      check("fq0", fq[0], stored);
      check("fq1", fq[1], stored);
      check("sq0", sq[0], tg[0] ^ sqk[0]);
      check("sq1", sq[1], ~(tg[1] ^ sqk[1]));
    end
    checks++;
    if (n_shift == 0 || n_capture == 0 || n_sq_hold == 0) begin
      failures++;
      $display("mode coverage: shift=%0d capture=%0d sq_hold=%0d", n_shift, n_capture, n_sq_hold);
    end
    $display("shift=%0d capture=%0d sq held against a changed bit=%0d", n_shift, n_capture, n_sq_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
