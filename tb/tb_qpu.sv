// tb_qpu: one QPU with 8-amplitude chunks (N_SYSQBITS = 3), end to end.
//
// For each of several gates (unary, CNOT, controlled random matrix, idle)
// it shifts the 44-byte record in over the configuration port, streams a
// random 64-amplitude state in, and compares the output stream bit for bit
// with q2l_tb_pkg::qpu_ref. Input valid and output ready are random in
// half of the runs and always high in the others; in those the first
// output must appear 2^(N_SYSQBITS-1) + 4 cycles after the first input and
// the whole state must pass at two amplitudes per cycle.
module tb_qpu;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;
  localparam int NS = 3, NAMP = 64;
  logic clk = 0, rst_n = 0;
  logic cfg_in_valid, cfg_out_valid;
  logic [7:0] cfg_in_byte, cfg_out_byte;
  logic in_valid, in_ready, out_valid, out_ready, overlap, stall, kept;
  cpair_t in_data, out_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  qpu #(.N_SYSQBITS(NS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qpu_cfg_t g;
    state_t st, ex;
    cfg_in_valid = 0; cfg_in_byte = 0; in_valid = 0; in_data = '0; out_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int ni, no, t_in, t_out, t_last;
      logic steady;
      steady = (run % 2 == 0);
      case (run % 4)
        0: g = gate(GATE_UNARY, rnd_c(), rnd_c(), rnd_c(), rnd_c(), run % NS, 0);
        1: g = gate(GATE_CONTROLLED, '0, mk_c(1.0, 0.0), mk_c(1.0, 0.0), '0, run % NS, (run + 1) % NS);
        2: g = gate(GATE_CONTROLLED, rnd_c(), rnd_c(), rnd_c(), rnd_c(), run % NS, (run + 2) % NS);
        default: g = gate(GATE_PASS, rnd_c(), rnd_c(), rnd_c(), rnd_c(), 0, 0);
      endcase
      for (int i = 0; i < CFG_BYTES; i++) begin
        @(negedge clk); cfg_in_valid = 1; cfg_in_byte = cfg_byte(g, i);
      end
      @(negedge clk); cfg_in_valid = 0;
      st = new[NAMP];
      foreach (st[i]) st[i] = rnd_c();
      ex = new[NAMP](st);
      qpu_ref(ex, g, NS);
      ni = 0; no = 0; t_in = -1; t_out = -1; t_last = 0;
      while (no < NAMP) begin
        in_valid  = (ni < NAMP) && (steady || $urandom % 2);
        in_data   = {st[ni + 1 < NAMP ? ni + 1 : 0], st[ni < NAMP ? ni : 0]};
        out_ready = steady || ($urandom % 3 != 0);
        @(posedge clk);
        if (in_valid && in_ready) begin
          if (t_in < 0) t_in = cyc;
          ni += 2;
        end
        if (out_valid && out_ready) begin
          if (t_out < 0) t_out = cyc;
          t_last = cyc;
          checks += 2;
          if (out_data[0] !== ex[no] || out_data[1] !== ex[no + 1]) begin
            failures++;
            if (failures < 10) $display("run %0d position %0d: got %h exp %h", run, no, out_data[0], ex[no]);
          end
          no += 2;
        end
        @(negedge clk);
      end
      in_valid = 0;
      if (steady) begin
        checks += 2;
        if (t_out - t_in != (1 << (NS - 1)) + 4) begin
          failures++; $display("run %0d: first output after %0d cycles", run, t_out - t_in);
        end
        if (t_last - t_out != NAMP / 2 - 1) begin
          failures++; $display("run %0d: output took %0d cycles", run, t_last - t_out + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
