// tb_scan_ff: random D/SD/SE stimulus; after every rising edge Q must hold
// the input selected by SE just before the edge.
module tb_scan_ff;
  logic ck, se, d, sd, q;
  int checks = 0, failures = 0;
  int n_shift = 0, n_capture = 0;

  scan_ff dut (.ck, .se, .d, .sd, .q);

  initial ck = 0;
  always #5 ck = ~ck;

  initial begin
    logic exp;
    for (int i = 0; i < 400; i++) begin
      @(negedge ck);
      se = 1'($urandom); d = 1'($urandom); sd = 1'($urandom);
      exp = se ? sd : d;
      if (se) n_shift++; else n_capture++;
      @(posedge ck); #1;
      checks++;
      if (q !== exp) begin
        failures++;
        $display("cycle %0d: se=%0b d=%0b sd=%0b q=%0b", i, se, d, sd, q);
      end
    end
    checks++;
    if (n_shift == 0 || n_capture == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
