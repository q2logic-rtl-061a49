// tb_circuits: whole quantum circuits scheduled onto a small pipeline.
//
// The pipeline is the one of the scheduling example: 4 QPUs, each able to
// work on 2 neighbouring qubits (N_SYSQBITS = 2), here with 128-bit state
// reads. Small versions of the benchmark circuit families are run from
// |0...0>:
//   adder      the 4-qubit quantum adder of the example (X, T, T-dagger, H, S, CNOT)
//   cat_state  8 qubits, H then a chain of CNOTs
//   qft        3-qubit quantum Fourier transform of a basis state (H and
//              controlled phases; with 2-qubit windows its long-range
//              controlled phases only fit on a 3-qubit state)
//   ising      one Trotter step of a 6-qubit Ising chain (H, CNOT-Rz-CNOT, Rx)
//   wstate     4-qubit W state (X, controlled Ry, CNOT)
//   swap_test  3 qubits, controlled swap built from CNOTs and a Toffoli
//              decomposed into H, T and CNOT (the kernel of kNN as well)
//   vqc        5-qubit variational classifier, Ry/Rz layers and CNOT chains
// The cat and W states are also checked against their known amplitudes.
//
// A small greedy scheduler in the testbench turns each circuit into
// bitstreams. It keeps the qubit order in memory a rotation of the
// natural order: logical qubit k sits at address bit (k - o) mod Q. Gates
// are packed in circuit order into the current bitstream while their qubits
// sit at bits 0..N_SYSQBITS-1 and QPUs are left; a gate whose target bit is
// not 0 is followed by an idle QPU with the same target, which undoes the
// QPU's output bit swap. When the next gate does not fit, the bitstream is
// closed with the write-back rotation that brings that gate's qubits down;
// the last one rotates back to the natural order. Every amplitude of the
// result is compared with a double-precision simulation of the circuit
// (tolerance 1e-5).
module tb_circuits;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;

  localparam int NQ = 4, NS = 2, BLW = 128, LANES = BLW / 64, QMAX = 8;
  localparam int NAMPMAX = 1 << QMAX;

  typedef struct {
    real a_re, a_im, b_re, b_im, c_re, c_im, d_re, d_im;
    int  t;
    int  c;     // control qubit, -1 for a single-qubit gate
  } qgate_t;

  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] num_qubits = 4;
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

  q2logic_top #(.N_QPU(NQ), .N_SYSQBITS(NS), .B_LW(BLW)) dut (.*);
  ddr_model #(.LANES(LANES), .CFG_SIZE(NQ * CFG_BYTES), .AMP_SIZE(2 * NAMPMAX), .LATENCY(6)) mem (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  qgate_t circ[$];

  function automatic qgate_t mk(real a_re, real a_im, real b_re, real b_im, real c_re, real c_im, real d_re, real d_im,
                                int t, int c);
    qgate_t g;
    g.a_re = a_re; g.a_im = a_im; g.b_re = b_re; g.b_im = b_im; g.c_re = c_re; g.c_im = c_im; g.d_re = d_re; g.d_im = d_im;
    g.t = t; g.c = c;
    return g;
  endfunction
  function automatic qgate_t g_x(int t);  return mk(0,0, 1,0, 1,0, 0,0, t, -1); endfunction
  function automatic qgate_t g_h(int t);
    real h = 0.70710678118654752;
    return mk(h,0, h,0, h,0, -h,0, t, -1);
  endfunction
  function automatic qgate_t g_ph(int t, real th, int c);
    return mk(1,0, 0,0, 0,0, $cos(th),$sin(th), t, c);
  endfunction
  function automatic qgate_t g_t(int t);  return g_ph(t, 3.14159265358979 / 4, -1); endfunction
  function automatic qgate_t g_td(int t); return g_ph(t, -3.14159265358979 / 4, -1); endfunction
  function automatic qgate_t g_s(int t);  return g_ph(t, 3.14159265358979 / 2, -1); endfunction
  function automatic qgate_t g_cx(int c, int t); return mk(0,0, 1,0, 1,0, 0,0, t, c); endfunction
  // rotations by th about y, z and x; a control c >= 0 makes them controlled
  function automatic qgate_t g_ry(int t, real th, int c);
    return mk($cos(th / 2),0, -$sin(th / 2),0, $sin(th / 2),0, $cos(th / 2),0, t, c);
  endfunction
  function automatic qgate_t g_rz(int t, real th);
    return mk($cos(th / 2),-$sin(th / 2), 0,0, 0,0, $cos(th / 2),$sin(th / 2), t, -1);
  endfunction
  function automatic qgate_t g_rx(int t, real th);
    return mk($cos(th / 2),0, 0,-$sin(th / 2), 0,-$sin(th / 2), $cos(th / 2),0, t, -1);
  endfunction
  // Toffoli (controls c1, c2) from H, T, T-dagger and CNOT
  function automatic void push_ccx(int c1, int c2, int t);
    circ.push_back(g_h(t));   circ.push_back(g_cx(c2, t)); circ.push_back(g_td(t));
    circ.push_back(g_cx(c1, t)); circ.push_back(g_t(t));  circ.push_back(g_cx(c2, t));
    circ.push_back(g_td(t));  circ.push_back(g_cx(c1, t)); circ.push_back(g_t(c2));
    circ.push_back(g_t(t));   circ.push_back(g_h(t));     circ.push_back(g_cx(c1, c2));
    circ.push_back(g_t(c1));  circ.push_back(g_td(c2));   circ.push_back(g_cx(c1, c2));
  endfunction

  // double-precision reference simulation
  real sr [NAMPMAX], si [NAMPMAX];
  task automatic ideal_apply(qgate_t g, int q);
    for (int i = 0; i < (1 << q); i++) begin
      int j;
      real x0r, x0i, x1r, x1i;
      if (((i >> g.t) & 1) != 0) continue;
      if (g.c >= 0 && ((i >> g.c) & 1) == 0) continue;
      j = i | (1 << g.t);
      x0r = sr[i]; x0i = si[i]; x1r = sr[j]; x1i = si[j];
      sr[i] = g.a_re * x0r - g.a_im * x0i + g.b_re * x1r - g.b_im * x1i;
      si[i] = g.a_re * x0i + g.a_im * x0r + g.b_re * x1i + g.b_im * x1r;
      sr[j] = g.c_re * x0r - g.c_im * x0i + g.d_re * x1r - g.d_im * x1i;
      si[j] = g.c_re * x0i + g.c_im * x0r + g.d_re * x1i + g.d_im * x1r;
    end
  endtask

  int src;   // amplitude offset of the current state in memory
  int nbitstreams;

  // run one bitstream (NQ records, QPU 0 first in recs) with a rotation
  task automatic run_bitstream(qpu_cfg_t recs[NQ], int q, int r);
    for (int k = 0; k < NQ; k++)
      for (int b = 0; b < CFG_BYTES; b++)
        mem.cfg_mem[k * CFG_BYTES + b] = cfg_byte(recs[NQ - 1 - k], b);
    @(negedge clk);
    num_qubits = 6'(q);
    rotate = 8'(r);
    rd_base = ADDR_W'(src / LANES);
    wr_base = ADDR_W'(NAMPMAX - src);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    src = NAMPMAX - src;
    nbitstreams++;
  endtask

  task automatic run_circuit(string name, int q);
    qpu_cfg_t recs [NQ];
    int o, gi, n, used;
    real err;
    o = 0; gi = 0; n = circ.size();
    nbitstreams = 0;
    // |0...0>
    for (int i = 0; i < (1 << q); i++) begin
      sr[i] = 0.0; si[i] = 0.0;
      mem.amp[src + i] = '0;
    end
    sr[0] = 1.0;
    mem.amp[src] = mk_c(1.0, 0.0);
    foreach (circ[i]) ideal_apply(circ[i], q);
    while (gi < n || o != 0) begin
      int onew;
      used = 0;
      for (int k = 0; k < NQ; k++) recs[k] = gate(GATE_PASS, '0, '0, '0, '0, 0, 0);
      while (gi < n) begin
        qgate_t g;
        int pt, pc, need;
        g = circ[gi];
        pt = ((g.t - o) % q + q) % q;
        pc = (g.c < 0) ? 0 : ((g.c - o) % q + q) % q;
        need = (pt != 0) ? 2 : 1;
        if (pt >= NS || pc >= NS || used + need > NQ) break;
        recs[used] = gate(g.c < 0 ? GATE_UNARY : GATE_CONTROLLED,
                          mk_c(g.a_re, g.a_im), mk_c(g.b_re, g.b_im), mk_c(g.c_re, g.c_im), mk_c(g.d_re, g.d_im), pt, pc);
        used++;
        if (pt != 0) begin
          recs[used] = gate(GATE_PASS, '0, '0, '0, '0, pt, 0);
          used++;
        end
        gi++;
      end
      // rotation for the next gate, or back to the natural order at the end
      if (gi < n) begin
        qgate_t g;
        g = circ[gi];
        onew = g.t;
        if (g.c >= 0 && ((g.c - onew) % q + q) % q >= NS) onew = g.c;
        if (g.c >= 0 && ((g.t - onew) % q + q) % q >= NS) begin
          $display("%s: gate %0d cannot be scheduled", name, gi);
          failures++;
          return;
        end
      end else onew = 0;
      run_bitstream(recs, q, ((onew - o) % q + q) % q);
      o = onew;
    end
    err = 0.0;
    for (int i = 0; i < (1 << q); i++) begin
      real d_re, d_im;
      d_re = f2r(mem.amp[src + i].re) - sr[i];
      d_im = f2r(mem.amp[src + i].im) - si[i];
      if (d_re < 0) d_re = -d_re;
      if (d_im < 0) d_im = -d_im;
      if (d_re > err) err = d_re;
      if (d_im > err) err = d_im;
      checks++;
      if (d_re > 1e-5 || d_im > 1e-5) begin
        failures++;
        if (failures < 10) $display("%s amp %0d: got (%f, %f) exp (%f, %f)", name, i,
                                    f2r(mem.amp[src + i].re), f2r(mem.amp[src + i].im), sr[i], si[i]);
      end
    end
    $display("%s: %0d qubits, %0d gates, %0d bitstreams, max error %g", name, q, n, nbitstreams, err);
  endtask

  initial begin
    src = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // the 4-qubit adder of the scheduling example, in time order
    circ = {};
    circ.push_back(g_x(0)); circ.push_back(g_x(1)); circ.push_back(g_h(3));
    circ.push_back(g_t(0)); circ.push_back(g_t(1)); circ.push_back(g_cx(2, 3));
    circ.push_back(g_cx(0, 1)); circ.push_back(g_t(2)); circ.push_back(g_td(3));
    circ.push_back(g_cx(2, 3)); circ.push_back(g_cx(3, 0)); circ.push_back(g_cx(1, 2));
    circ.push_back(g_cx(0, 1)); circ.push_back(g_cx(2, 3));
    for (int k = 0; k < 4; k++) circ.push_back(g_td(k));
    circ.push_back(g_cx(0, 1)); circ.push_back(g_cx(2, 3));
    circ.push_back(g_s(3)); circ.push_back(g_cx(3, 0)); circ.push_back(g_h(3));
    run_circuit("adder", 4);

    // cat state on 8 qubits
    circ = {};
    circ.push_back(g_h(0));
    for (int k = 1; k < 8; k++) circ.push_back(g_cx(k - 1, k));
    run_circuit("cat_state", 8);
    for (int i = 0; i < 256; i++) begin
      real e;
      e = (i == 0 || i == 255) ? 0.70710678 : 0.0;
      checks++;
      if (f2r(mem.amp[src + i].re) - e > 1e-5 || e - f2r(mem.amp[src + i].re) > 1e-5) failures++;
    end

    // QFT of the basis state |101> on 3 qubits (in a 3-qubit state every
    // pair of qubits is neighbouring after some rotation)
    circ = {};
    circ.push_back(g_x(0)); circ.push_back(g_x(2));
    for (int j = 2; j >= 0; j--) begin
      circ.push_back(g_h(j));
      for (int k = j - 1; k >= 0; k--)
        circ.push_back(g_ph(j, 3.14159265358979 / real'(1 << (j - k)), k));
    end
    run_circuit("qft", 3);

    // Ising model: one Trotter step exp(-iJ dt ZZ) on a 6-qubit chain
    // (CNOT, Rz, CNOT per bond) after a Hadamard layer, then an Rx layer
    circ = {};
    for (int k = 0; k < 6; k++) circ.push_back(g_h(k));
    for (int k = 0; k < 5; k++) begin
      circ.push_back(g_cx(k, k + 1)); circ.push_back(g_rz(k + 1, 0.6)); circ.push_back(g_cx(k, k + 1));
    end
    for (int k = 0; k < 6; k++) circ.push_back(g_rx(k, 0.3));
    run_circuit("ising", 6);

    // W state on 4 qubits with nearest-neighbour gates: X, then for each
    // qubit a controlled Ry that moves part of the excitation up, and a CNOT
    circ = {};
    circ.push_back(g_x(0));
    for (int k = 0; k < 3; k++) begin
      circ.push_back(g_ry(k + 1, 2.0 * $acos($sqrt(1.0 / real'(4 - k))), k));
      circ.push_back(g_cx(k + 1, k));
    end
    run_circuit("wstate", 4);
    for (int i = 0; i < 16; i++) begin
      real e;
      e = (i == 1 || i == 2 || i == 4 || i == 8) ? 0.5 : 0.0;
      checks++;
      if (f2r(mem.amp[src + i].re) - e > 1e-5 || e - f2r(mem.amp[src + i].re) > 1e-5) failures++;
    end

    // swap test of two single-qubit states (also the kernel of the kNN
    // circuit): H on the ancilla, a controlled swap built from CNOTs and a
    // Toffoli, H again
    circ = {};
    circ.push_back(g_ry(1, 0.9, -1)); circ.push_back(g_ry(2, 2.1, -1));
    circ.push_back(g_h(0));
    circ.push_back(g_cx(2, 1)); push_ccx(0, 1, 2); circ.push_back(g_cx(2, 1));
    circ.push_back(g_h(0));
    run_circuit("swap_test", 3);

    // variational classifier: two layers of Ry/Rz on 5 qubits, each followed
    // by a CNOT chain
    circ = {};
    for (int l = 0; l < 2; l++) begin
      for (int k = 0; k < 5; k++) begin
        circ.push_back(g_ry(k, 0.37 * real'(k + 1) + real'(l), -1));
        circ.push_back(g_rz(k, 0.21 * real'(k + 2) - real'(l)));
      end
      for (int k = 0; k < 4; k++) circ.push_back(g_cx(k, k + 1));
    end
    run_circuit("vqc", 5);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
