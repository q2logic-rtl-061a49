// tb_serializer: a 16-lane serializer (1024-bit words) with random
// valid/ready on both sides. Every output pair must be lanes 2k, 2k+1 of
// the current word in order, a word must be consumed with its last pair,
// and with both sides always ready a word must leave in 8 consecutive cycles.
module tb_serializer;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  cplx_t [L-1:0] in_data;
  cpair_t out_data;
  cplx_t exp_q[$];
  int checks = 0, failures = 0;

  serializer #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      logic steady;
      int pairs, cycles;
      steady = (w % 4 == 0);
      for (int l = 0; l < L; l++) begin in_data[l] = rnd_c(); exp_q.push_back(in_data[l]); end
      pairs = 0; cycles = 0;
      in_valid = steady || $urandom % 2;
      while (1) begin
        out_ready = steady || $urandom % 2;
        #1;
        cycles++;
        if (out_valid && out_ready) begin
          cplx_t e0, e1;
          e0 = exp_q.pop_front(); e1 = exp_q.pop_front();
          checks++;
          if (out_data[0] !== e0 || out_data[1] !== e1) begin failures++; $display("word %0d pair %0d wrong", w, pairs); end
          pairs++;
          checks++;
          if (in_ready != (pairs == L / 2)) begin failures++; $display("in_ready wrong at pair %0d", pairs); end
        end else if (in_valid && in_ready) begin
          failures++; $display("word consumed without a transfer");
        end
        @(negedge clk);
        if (pairs == L / 2) break;
        if (!in_valid) in_valid = steady || $urandom % 2;
      end
      if (steady) begin
        checks++;
        if (cycles != L / 2) begin failures++; $display("word took %0d cycles", cycles); end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
