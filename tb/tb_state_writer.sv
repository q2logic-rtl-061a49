// tb_state_writer: write-back with address rotation.
//
// For 5- and 6-qubit states and every rotation from -Q to +Q, streams the
// amplitudes in (with random valid in some runs and random write grants in
// others) and checks each write: address = base + label rotated right by
// rotate mod Q, data = the amplitude with that arrival label, every address
// written once, done once after the last write. It also replays the paper's
// example: on 4 qubits, rotate 2 moves qubits 2-3 to address bits 0-1, and
// a following rotate -1 moves qubits 1-2 there. With both sides always
// ready the writer must take one pair per cycle.
module tb_state_writer;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] num_qubits;
  logic signed [7:0] rotate;
  logic [ADDR_W-1:0] wr_base;
  logic in_valid, in_ready, wr_req, wr_gnt, busy, done;
  cpair_t in_data, wr_data;
  logic [1:0][ADDR_W-1:0] wr_addr;
  int checks = 0, failures = 0;
  int ndone;

  state_writer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && done) ndone++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // logical qubit held at address bit i after the two rotations of the example
  function automatic int qubit_at(int bit_i, int r1, int r2);
    int l;
    l = rotr(1 << bit_i, ((-r2 % 4) + 4) % 4, 4);   // undo second rotation
    l = rotr(l, ((-r1 % 4) + 4) % 4, 4);            // undo first rotation
    return $clog2(l);
  endfunction

  task automatic run(int q, int r, int mode);
    cplx_t st[];
    bit seen[];
    int ni, nw, t0, t1;
    st = new[1 << q];
    seen = new[1 << q];
    foreach (st[i]) st[i] = rnd_c();
    @(negedge clk);
    num_qubits = 6'(q); rotate = 8'(r); wr_base = ADDR_W'(1000 * mode + 7);
    start = 1;
    @(negedge clk); start = 0;
    ni = 0; nw = 0; ndone = 0; t0 = -1; t1 = 0;
    while (nw < (1 << q) / 2) begin
      in_valid = (ni < (1 << q)) && (mode != 1 || $urandom % 2);
      in_data  = {st[(ni + 1) % (1 << q)], st[ni % (1 << q)]};
      wr_gnt   = (mode != 2) || ($urandom % 3 != 0);
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (t0 < 0) t0 = $time / 10;
        ni += 2;
      end
      if (wr_req && wr_gnt) begin
        t1 = $time / 10;
        for (int k = 0; k < 2; k++) begin
          int a, lbl;
          a = int'(wr_addr[k]) - (1000 * mode + 7);
          lbl = rotr(a, ((-r % q) + q) % q, q);   // inverse rotation gives the label
          checks++;
          if (a < 0 || a >= (1 << q) || seen[a] || wr_data[k] !== st[lbl] ||
              rotr(lbl, ((r % q) + q) % q, q) != a) begin
            failures++;
            if (failures < 10) $display("q %0d r %0d: write %0d to %0d wrong", q, r, nw, a);
          end else seen[a] = 1;
        end
        nw++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 1 || busy) begin failures++; $display("q %0d r %0d: done %0d busy %0d", q, r, ndone, busy); end
    if (mode == 0) begin
      checks++;
      if (t1 - t0 != (1 << q) / 2) begin failures++; $display("q %0d r %0d: %0d cycles", q, r, t1 - t0); end
    end
  endtask

  initial begin
    in_valid = 0; wr_gnt = 1; in_data = '0; num_qubits = 5; rotate = 0; wr_base = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 5; q <= 6; q++)
      for (int r = -q; r <= q; r++)
        run(q, r, (r + q) % 3);
    // the paper's example: rotate 2, then -1, on 4 qubits
    run(4, 2, 0);
    run(4, -1, 0);
    checks += 4;
    if (qubit_at(0, 2, 0) != 2 || qubit_at(1, 2, 0) != 3) failures++;
    if (qubit_at(0, 2, -1) != 1 || qubit_at(1, 2, -1) != 2) failures++;
    $display("after rotate 2: bits 0,1 hold qubits %0d,%0d; after rotate -1: %0d,%0d",
             qubit_at(0, 2, 0), qubit_at(1, 2, 0), qubit_at(0, 2, -1), qubit_at(1, 2, -1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
