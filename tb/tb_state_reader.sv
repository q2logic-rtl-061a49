// tb_state_reader: the state reader with a behavioural memory.
//
// 3 QPUs (132 configuration bytes), 4-lane words, an 8-word credit window (more than the memory round trip),
// 7-qubit state (32 words). The consumer, a queue standing in for the word
// FIFO, pops at random and returns a credit per pop. Checks: the chain
// receives exactly the bitstream bytes in order; no state read is issued
// before the last configuration byte has returned; the words arrive in
// address order with the right contents; the queue never holds more than
// the credit window; done pulses once, after the last word. With full
// grants and a consumer that never waits, the run must take no longer than
// one cycle per byte and per word plus two memory latencies.
module tb_state_reader;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  localparam int NQ = 3, L = 4, DEPTH = 8, Q = 7, LAT = 6;
  localparam int NBYTES = NQ * CFG_BYTES, NWORDS = (1 << Q) / L;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] num_qubits = 6'(Q);
  logic [ADDR_W-1:0] cfg_base, st_base;
  logic cfg_req, cfg_gnt, cfg_rvalid, st_req, st_gnt, st_rvalid;
  logic [ADDR_W-1:0] cfg_addr, st_addr;
  logic [7:0] cfg_rdata;
  cplx_t [L-1:0] st_rdata, word_data;
  logic chain_valid, word_valid, credit_return, busy, done;
  logic [7:0] chain_byte;
  logic wr_req = 0, wr_gnt;
  logic [1:0][ADDR_W-1:0] wr_addr = '0;
  cpair_t wr_data = '0;
  int unsigned gnt_pct = 100, wr_pct = 100;
  int checks = 0, failures = 0;
  int nbytes, nwords, ndone, maxq;
  logic cfg_finished;
  cplx_t [L-1:0] wq[$];
  logic pop_en;

  state_reader #(.N_QPU(NQ), .LANES(L), .FIFO_DEPTH(DEPTH)) dut (.*);
  ddr_model #(.LANES(L), .CFG_SIZE(1024), .AMP_SIZE(1024), .LATENCY(LAT)) mem (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign credit_return = pop_en && wq.size() > 0;

  always @(posedge clk) if (rst_n) begin
    if (chain_valid) begin
      checks++;
      if (chain_byte !== mem.cfg_mem[cfg_base + nbytes]) failures++;
      nbytes++;
      if (nbytes == NBYTES) cfg_finished = 1;
    end
    if (st_req && st_gnt) begin
      checks++;
      if (!cfg_finished) begin failures++; $display("state read before configuration finished"); end
    end
    if (credit_return) void'(wq.pop_front());
    if (word_valid) begin
      checks++;
      for (int l = 0; l < L; l++)
        if (word_data[l] !== mem.amp[(st_base + nwords) * L + l]) begin
          failures++;
          $display("word %0d lane %0d wrong", nwords, l);
        end
      wq.push_back(word_data);
      nwords++;
    end
    if (wq.size() > maxq) maxq = wq.size();
    if (done) begin
      ndone++;
      checks++;
      if (nwords != NWORDS) begin failures++; $display("done after %0d words", nwords); end
    end
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin mem.cfg_mem[i] = 8'($urandom); mem.amp[i] = rnd_c(); end
    pop_en = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int t0;
      nbytes = 0; nwords = 0; ndone = 0; maxq = 0; cfg_finished = 0;
      cfg_base = ADDR_W'(run * 100);
      st_base  = ADDR_W'(run * 8);
      gnt_pct  = (run % 2) ? 60 : 100;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      t0 = $time;
      while (ndone == 0) begin
        pop_en = (run % 2 == 0) ? 1'b1 : 1'($urandom % 4 == 0);
        @(negedge clk);
      end
      pop_en = 1;
      repeat (DEPTH + 2) @(negedge clk);
      checks += 4;
      if (nbytes != NBYTES) begin failures++; $display("%0d bytes", nbytes); end
      if (maxq > DEPTH) begin failures++; $display("consumer queue reached %0d", maxq); end
      if (busy) failures++;
      if (run % 2 == 0 && ($time - t0) / 10 > NBYTES + NWORDS + 2 * LAT + 4 + DEPTH + 2) begin
        failures++; $display("run %0d took %0d cycles", run, ($time - t0) / 10);
      end
      $display("run %0d: max queue %0d, %0d cycles", run, maxq, ($time - t0) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
