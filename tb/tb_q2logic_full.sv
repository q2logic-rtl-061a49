// tb_q2logic_full: one complete run of the pipeline at its default size.
//
// 48 QPUs with 16384-amplitude chunks (N_SYSQBITS = 14) and 2048-bit state
// reads, on a 14-qubit state (the smallest state this configuration takes,
// one chunk). The 48 gate records are random unitary gates (unary, controlled,
// idle, on any target and control bit below 14), the write-back rotation is 5. The
// result in memory is compared bit for bit with the reference model, and
// the run time with the fill time of 48 chunk buffers plus one pass of the
// state at two amplitudes per cycle.
module tb_q2logic_full;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;

  localparam int NQ = 48, NS = 14, LANES = 32, Q = 14, ROT = 5;
  localparam int NAMP = 1 << Q;

  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] num_qubits = 6'(Q);
  logic signed [7:0] rotate = 8'(ROT);
  logic [ADDR_W-1:0] cfg_base = 0, rd_base = 0, wr_base = ADDR_W'(NAMP);
  logic busy, done;
  logic cfg_req, cfg_gnt, cfg_rvalid, st_req, st_gnt, st_rvalid, wr_req, wr_gnt;
  logic [ADDR_W-1:0] cfg_addr, st_addr;
  logic [7:0] cfg_rdata;
  cplx_t [LANES-1:0] st_rdata;
  logic [1:0][ADDR_W-1:0] wr_addr;
  cpair_t wr_data;
  obs_t obs;
  int unsigned gnt_pct = 100, wr_pct = 100;
  int checks = 0, failures = 0;

  q2logic_top dut (.*);
  ddr_model #(.LANES(LANES), .CFG_SIZE(NQ * CFG_BYTES), .AMP_SIZE(2 * NAMP), .LATENCY(6)) mem (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    state_t st, nx;
    qpu_cfg_t g [NQ];
    int t0, cyc, bound, bad;
    st = new[NAMP];
    for (int i = 0; i < NAMP; i++) begin
      st[i] = rnd_c();
      mem.amp[i] = st[i];
    end
    for (int k = 0; k < NQ; k++) g[k] = rnd_unitary_gate(NS);
    for (int k = 0; k < NQ; k++)
      for (int b = 0; b < CFG_BYTES; b++)
        mem.cfg_mem[k * CFG_BYTES + b] = cfg_byte(g[NQ - 1 - k], b);
    for (int k = 0; k < NQ; k++) qpu_ref(st, g[k], NS);
    nx = new[NAMP];
    for (int p = 0; p < NAMP; p++) nx[rotr(p, ROT, Q)] = st[p];

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    bad = 0;
    for (int i = 0; i < NAMP; i++) begin
      checks++;
      if (mem.amp[NAMP + i] !== nx[i]) begin
        failures++;
        if (bad++ < 10) $display("amp %0d: got %h exp %h", i, mem.amp[NAMP + i], nx[i]);
      end
    end
    bound = NQ * CFG_BYTES + 2 * 6 + NAMP / 2 + NQ * ((1 << (NS - 1)) + 5) + 40;
    $display("%0d cycles (bound %0d)", cyc, bound);
    checks++;
    if (cyc > bound) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
