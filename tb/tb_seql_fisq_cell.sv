// tb_seql_fisq_cell: all four FI/SQ gate-kind combinations (labels 00, 01,
// 10, 11) with random keys. The captured bit is FI through the FI gate; the
// scan output is the stored bit through the SQ gate while SE = 1.
module tb_seql_fisq_cell;
  import seql_pkg::*;

  logic ck, se, fi, sd;
  logic [3:0] fik, sqk, fq, sq;
  int checks = 0, failures = 0;
  int n_corrupt = 0, n_shift = 0, n_capture = 0;

  for (genvar c = 0; c < 4; c++) begin : g_cell
    seql_fisq_cell #(.FI_KIND(kg_t'(c[1])), .SQ_KIND(kg_t'(c[0]))) u (
      .ck, .se, .fi, .sd, .fik(fik[c]), .sqk(sqk[c]), .fq(fq[c]), .sq(sq[c])
    );
  end

  initial ck = 0;
  always #5 ck = ~ck;

  initial begin
    logic [3:0] stored, fi_inv, sq_inv;
    fi_inv = 4'b1100;   // cells 2, 3 have XNOR FI gates
    sq_inv = 4'b1010;   // cells 1, 3 have XNOR SQ gates
    se = 1; fi = 0; sd = 0; fik = 0; sqk = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge ck);
      se = ($urandom_range(2) == 0);
      fi = 1'($urandom); sd = 1'($urandom);
      fik = 4'($urandom); sqk = 4'($urandom);
      for (int c = 0; c < 4; c++) begin
        if (se) stored[c] = sd;
        else begin
          stored[c] = fi ^ fik[c] ^ fi_inv[c];
          if (stored[c] != fi) n_corrupt++;
        end
      end
      if (se) n_shift++; else n_capture++;
      @(posedge ck); #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (fq[c] !== stored[c]) begin
          failures++; $display("cycle %0d cell %0d fq=%0b exp %0b", i, c, fq[c], stored[c]);
        end
      end
      // open the SQ path for one cycle to observe the locked scan output
      @(negedge ck);
      se = 1;
      sqk = 4'($urandom);
      #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (sq[c] !== (stored[c] ^ sqk[c] ^ sq_inv[c])) begin
          failures++; $display("cycle %0d cell %0d sq=%0b", i, c, sq[c]);
        end
      end
    end
    checks++;
    if (n_corrupt == 0 || n_shift == 0 || n_capture == 0) failures++;
    $display("captures=%0d shifts=%0d corrupted captures=%0d", n_capture, n_shift, n_corrupt);
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
