// tb_q2logic_top: end-to-end test of the pipeline at reduced size.
//
// 4 QPUs with 8-amplitude chunks (N_SYSQBITS = 3), 256-bit state reads and
// an eight-word read FIFO and a two-pair FIFO, on an 8-qubit state. Four runs are chained, each reading
// the state the previous one wrote, with random gates (unary, controlled,
// idle), a random write-back rotation and a memory that grants
// read requests with 100, 50, 80 and 100 percent
// probability and write requests with 100, 50, 20 and 100 percent. After each run every
// amplitude in memory is compared bit for bit with a reference model built
// from q2l_tb_pkg. On the fully granted runs the run time is checked
// against the rate of two amplitudes per cycle plus the fill time of each
// QPU. Every mechanism reported on the obs port (FIFO full, QPU load/compute
// overlap, QPU stall, control-bit pass, write stall) must occur at least
// once.
module tb_q2logic_top;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;

  localparam int NQ = 4, NS = 3, BLW = 256, LANES = BLW / 64, Q = 8;
  localparam int NAMP = 1 << Q;

  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] num_qubits = 6'(Q);
  logic signed [7:0] rotate = 0;
  logic [ADDR_W-1:0] cfg_base = 0, rd_base = 0, wr_base = 0;
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
  int ev [7];

  q2logic_top #(.N_QPU(NQ), .N_SYSQBITS(NS), .B_LW(BLW), .RD_FIFO_DEPTH(8), .SER_FIFO_DEPTH(2)) dut (.*);
  ddr_model #(.LANES(LANES), .CFG_SIZE(1024), .AMP_SIZE(2 * NAMP), .LATENCY(6)) mem (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (obs.word_fifo_full) ev[0]++;
    if (obs.pair_fifo_full) ev[1]++;
    if (obs.qpu_overlap)    ev[2]++;
    if (obs.qpu_stall)      ev[3]++;
    if (obs.qpu_kept)       ev[4]++;
    if (obs.write_stall)    ev[5]++;
    if (obs.reader_done)    ev[6]++;
  end

  initial begin
    state_t st;
    qpu_cfg_t g [NQ];
    int pct [4] = '{100, 50, 80, 100};
    int wpct [4] = '{100, 50, 20, 100};
    string names [7] = '{"word FIFO full", "pair FIFO full", "QPU load/compute overlap",
                         "QPU stall", "control-bit pass", "write stall", "reader done"};
    st = new[NAMP];
    for (int i = 0; i < NAMP; i++) begin
      st[i] = rnd_c();
      mem.amp[i] = st[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int src, dst, r, t0, cyc, bound;
      state_t nx;
      src = (run % 2) * NAMP;
      dst = NAMP - src;
      r = int'($urandom % (2 * Q)) - Q;
      for (int k = 0; k < NQ; k++) g[k] = rnd_gate(NS);
      if (run == 0) g[1] = gate(GATE_CONTROLLED, '0, mk_c(1.0, 0.0), mk_c(1.0, 0.0), '0, 2, 0); // CNOT
      // the record of the last QPU goes first
      for (int k = 0; k < NQ; k++)
        for (int b = 0; b < CFG_BYTES; b++)
          mem.cfg_mem[k * CFG_BYTES + b] = cfg_byte(g[NQ - 1 - k], b);
      for (int k = 0; k < NQ; k++) qpu_ref(st, g[k], NS);
      nx = new[NAMP];
      for (int p = 0; p < NAMP; p++) nx[rotr(p, (r % Q + Q) % Q, Q)] = st[p];
      st = nx;

      gnt_pct = pct[run];
      wr_pct = wpct[run];
      @(negedge clk);
      rotate = 8'(r);
      rd_base = ADDR_W'(src / LANES);
      wr_base = ADDR_W'(dst);
      start = 1;
      @(negedge clk);
      start = 0;
      t0 = $time;
      while (!done) @(negedge clk);
      cyc = ($time - t0) / 10;
      for (int i = 0; i < NAMP; i++) begin
        checks++;
        if (mem.amp[dst + i] !== st[i]) begin
          failures++;
          if (failures < 10)
            $display("run %0d amp %0d: got %h exp %h", run, i, mem.amp[dst + i], st[i]);
        end
      end
      // configuration, memory latency, one pass of the state at two
      // amplitudes per cycle, and the fill time of each QPU and FIFO
      bound = NQ * CFG_BYTES + 2 * 6 + NAMP / 2 + NQ * ((1 << (NS - 1)) + 5) + 20;
      $display("run %0d: rotate %0d, grant %0d%%, %0d cycles (bound %0d)", run, r, pct[run], cyc, bound);
      if (pct[run] == 100) begin
        checks++;
        if (cyc > bound) begin
          failures++;
          $display("run %0d too slow", run);
        end
      end
      repeat (5) @(negedge clk);
    end
    for (int e = 0; e < 7; e++) begin
      checks++;
      $display("%s: %0d cycles", names[e], ev[e]);
      if (ev[e] == 0) begin
        failures++;
        $display("mechanism never seen: %s", names[e]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
