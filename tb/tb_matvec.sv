// tb_matvec: self-checking test of the matrix-vector unit and, through it,
// of the single-precision multiplier and adder.
//
// Drives random matrices and amplitude pairs, including exact zeros, exact
// cancellations and unit matrices, with random stalls (en low), and
// compares every output pair bit for bit against fp_ref_pkg::mv2. It also
// checks that each result appears exactly LATENCY = 3 enabled cycles after
// its input.
module tb_matvec;
  import q2l_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0, en, in_valid, out_valid;
  cpair_t x, y;
  cplx_t a, b, c, d;
  int checks = 0, failures = 0;

  matvec dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cpair_t exp_q[$];
  int     tin_q[$];
  int     en_cycles = 0;

  initial begin
    int n_sent = 0;
    en = 0; in_valid = 0; x = '0; a = '0; b = '0; c = '0; d = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the matrix is static while a QPU streams: change it only when idle
    for (int blk = 0; blk < 40; blk++) begin
      case (blk % 4)
        0: begin a = rnd_c(); b = rnd_c(); c = rnd_c(); d = rnd_c(); end
        1: begin a = mk_c(1.0, 0.0); b = '0; c = '0; d = mk_c(1.0, 0.0); end     // identity
        2: begin a = '0; b = mk_c(1.0, 0.0); c = mk_c(1.0, 0.0); d = '0; end     // Pauli-X
        default: begin a = mk_c(0.70710678, 0.0); b = a; c = a; d = mk_c(-0.70710678, 0.0); end // H
      endcase
      for (int i = 0; i < 50; i++) begin
        @(negedge clk);
        en = ($urandom % 4) != 0;
        in_valid = ($urandom % 3) != 0;
        x[0] = rnd_c();
        x[1] = ($urandom % 5 == 0) ? x[0] : rnd_c();   // equal inputs give exact cancellations under H
        if (en && in_valid) begin
          exp_q.push_back(mv2(a, b, c, d, x));
          tin_q.push_back(en_cycles);
          n_sent++;
        end
      end
      @(negedge clk); in_valid = 0; en = 1;
      repeat (5) @(negedge clk);
    end
    en = 0;
    @(negedge clk);
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results never appeared", exp_q.size());
    end
    checks++;
    $display("sent %0d pairs", n_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results are sampled when the enabled output register is valid
  always @(posedge clk) begin
    if (rst_n && en) en_cycles++;
    if (rst_n && out_valid && en) begin
      cpair_t e;
      int t0;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = exp_q.pop_front();
        t0 = tin_q.pop_front();
        if (y !== e) begin
          failures++;
          if (failures < 10)
            $display("mismatch: got %h %h %h %h exp %h %h %h %h", y[0].re, y[0].im, y[1].re, y[1].im,
                     e[0].re, e[0].im, e[1].re, e[1].im);
        end
        if (en_cycles - 1 - t0 != 3) begin
          failures++;
          if (failures < 10) $display("latency %0d", en_cycles - 1 - t0);
        end
      end
    end
  end
endmodule
