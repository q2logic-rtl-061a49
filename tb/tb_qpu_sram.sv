// tb_qpu_sram: the double-buffered SRAM against an array model.
// Writes two words per cycle into one bank at random distinct addresses
// while reading two words per cycle from the other bank, with random read
// enables; read data must appear one cycle after an enabled read and hold
// while re is low.
module tb_qpu_sram;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  localparam int NS = 4, AW = NS + 1;
  logic clk = 0;
  logic we0, we1, re;
  logic [AW-1:0] wa0, wa1, ra0, ra1;
  cplx_t wd0, wd1, rd0, rd1;
  cplx_t model [2**AW];
  cplx_t e0, e1;
  int checks = 0, failures = 0;

  qpu_sram #(.N_SYSQBITS(NS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_valid = 0;
    we0 = 0; we1 = 0; re = 0; wa0 = 0; wa1 = 0; ra0 = 0; ra1 = 0; wd0 = '0; wd1 = '0;
    // fill both banks
    for (int a = 0; a < 2**AW; a += 2) begin
      @(negedge clk);
      we0 = 1; we1 = 1; wa0 = AW'(a); wa1 = AW'(a + 1); wd0 = rnd_c(); wd1 = rnd_c();
      model[a] = wd0; model[a+1] = wd1;
    end
    for (int n = 0; n < 2000; n++) begin
      logic bank;
      @(negedge clk);
      if (exp_valid) begin
        checks += 2;
        if (rd0 !== e0 || rd1 !== e1) begin failures++; $display("read mismatch at %0d", n); end
      end
      bank = n[4];
      we0 = $urandom % 2; we1 = $urandom % 2;
      wa0 = {bank, 4'($urandom)};
      wa1 = {bank, wa0[3:0] ^ 4'(1 + $urandom % 15)};
      wd0 = rnd_c(); wd1 = rnd_c();
      re  = $urandom % 2;
      ra0 = {~bank, 4'($urandom)};
      ra1 = {~bank, 4'($urandom)};
      if (re) begin
        e0 = model[ra0]; e1 = model[ra1];
        exp_valid = 1;
      end
      if (we0) model[wa0] = wd0;
      if (we1) model[wa1] = wd1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
