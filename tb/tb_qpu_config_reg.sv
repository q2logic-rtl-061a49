// tb_qpu_config_reg: a chain of three configuration registers.
// Streams three random 44-byte records, last register's record first, with
// gaps between bytes, and checks that each register decodes its own record
// and that the bytes pushed out of the far end are the reset contents
// followed by the first record sent.
module tb_qpu_config_reg;
  import q2l_pkg::*;
  import fp_ref_pkg::*;
  import q2l_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic       v [4];
  logic [7:0] b [4];
  qpu_cfg_t   cfg [3];
  qpu_cfg_t   rec [3];
  logic [7:0] outq[$];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g
    qpu_config_reg u (.clk, .rst_n, .in_valid(v[i]), .in_byte(b[i]),
                      .out_valid(v[i+1]), .out_byte(b[i+1]), .cfg(cfg[i]));
  end
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && v[3]) outq.push_back(b[3]);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sent[$];
    v[0] = 0; b[0] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a junk record first, which must fall out of the far end
    for (int k = 0; k < CFG_BYTES; k++) begin
      @(negedge clk); v[0] = 1; b[0] = 8'($urandom); sent.push_back(b[0]);
    end
    for (int k = 0; k < 3; k++) rec[k] = rnd_gate(8);
    for (int k = 2; k >= 0; k--)
      for (int i = 0; i < CFG_BYTES; i++) begin
        @(negedge clk); v[0] = 0;
        if ($urandom % 3 == 0) begin @(negedge clk); end
        v[0] = 1; b[0] = cfg_byte(rec[k], i); sent.push_back(b[0]);
      end
    @(negedge clk); v[0] = 0;
    repeat (10) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (cfg[k] !== rec[k]) begin failures++; $display("register %0d holds the wrong record", k); end
    end
    checks++;
    // every shift pushes a byte out: first the three reset records (zero), then the junk record
    if (outq.size() != 4 * CFG_BYTES) begin failures++; $display("%0d bytes left the chain", outq.size()); end
    else for (int i = 0; i < 4 * CFG_BYTES; i++) begin
      checks++;
      if (outq[i] !== ((i < 3 * CFG_BYTES) ? 8'h00 : sent[i - 3 * CFG_BYTES])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
