// tb_bitswitch: exhaustive test of the label bit switch for W = 6 and W = 14.
// For every target bit it checks that bit 0 and the target bit trade places,
// all other bits stay, and that applying the switch twice gives the label back.
module tb_bitswitch;
  int checks = 0, failures = 0;
  logic [5:0]  l6, a6, b6;
  logic [2:0]  t6;
  logic [13:0] l14, a14;
  logic [3:0]  t14;

  bitswitch #(.W(6))  u6  (.label(l6), .target(t6), .addr(a6));
  bitswitch #(.W(6))  u6b (.label(a6), .target(t6), .addr(b6));
  bitswitch #(.W(14)) u14 (.label(l14), .target(t14), .addr(a14));

  function automatic int ref_sw(int v, int t);
    int b0 = v & 1, bt = (v >> t) & 1;
    return (v & ~(1 | (1 << t))) | bt | (b0 << t);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 6; t++)
      for (int v = 0; v < 64; v++) begin
        l6 = 6'(v); t6 = 3'(t); #1;
        checks += 2;
        if (int'(a6) != ref_sw(v, t)) begin failures++; $display("W6 t%0d %0d -> %0d", t, v, a6); end
        if (b6 != l6) failures++;
      end
    for (int t = 0; t < 14; t++)
      for (int n = 0; n < 500; n++) begin
        int v = $urandom % (1 << 14);
        l14 = 14'(v); t14 = 4'(t); #1;
        checks++;
        if (int'(a14) != ref_sw(v, t)) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
