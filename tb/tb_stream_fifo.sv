// tb_stream_fifo: the FIFO against a queue model, depth 4, width 16.
// Random pushes and pops; checks order, the fill level, that in_ready is
// low exactly when full and out_valid high exactly when not empty, and that
// the FIFO both fills up and runs empty during the test.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [2:0] count;
  logic [15:0] q[$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  stream_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int bias;
      bias = (n / 500) % 2 ? 3 : 1;   // alternate between filling and draining
      @(negedge clk);
      in_valid  = ($urandom % 4) < bias + 1;
      out_ready = ($urandom % 4) < 4 - bias;
      in_data   = 16'($urandom);
      #1;
      checks += 3;
      if (count != 3'(q.size())) begin failures++; $display("count %0d, model %0d", count, q.size()); end
      if (in_ready != (q.size() < 4)) failures++;
      if (out_valid != (q.size() > 0)) failures++;
      if (q.size() == 4) fulls++;
      if (q.size() == 0) empties++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q.pop_front()) failures++;
      end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("full %0d cycles, empty %0d cycles", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
