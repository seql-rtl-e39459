// tb_key_gate: exhaustive check of both key-gate kinds against their truth
// tables (XOR: y = a when k = 0; XNOR: y = a when k = 1).
module tb_key_gate;
  import seql_pkg::*;

  logic a, k, y_xor, y_xnor;
  int checks = 0, failures = 0;

  key_gate #(.KIND(KG_XOR))  u_xor  (.a, .k, .y(y_xor));
  key_gate #(.KIND(KG_XNOR)) u_xnor (.a, .k, .y(y_xnor));

  // truth tables indexed by {a, k}
  localparam logic [3:0] XOR_TT  = 4'b0110;
  localparam logic [3:0] XNOR_TT = 4'b1001;

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, k} = 2'(v);
      #1;
      checks += 2;
      if (y_xor  !== XOR_TT[v])  begin failures++; $display("XOR  a=%0b k=%0b y=%0b", a, k, y_xor);  end
      if (y_xnor !== XNOR_TT[v]) begin failures++; $display("XNOR a=%0b k=%0b y=%0b", a, k, y_xnor); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
