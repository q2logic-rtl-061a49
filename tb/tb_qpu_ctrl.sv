// tb_qpu_ctrl: the QPU controller against a label-tracking memory model.
//
// The testbench remembers which (chunk, label) the controller wrote at
// every SRAM address. For every pair the controller then reads it checks
// that the pair belongs to the oldest unread chunk, that its two labels
// differ exactly in the target bit with the target bit of the first one 0,
// that pairs come out in SRAM address order, and that keep_orig follows the
// gate kind and the control bit of the original label. It also checks that
// loading is refused only while both banks are full, and that a steady
// stream with no stalls is accepted every cycle (load and compute overlap).
module tb_qpu_ctrl;
  import q2l_pkg::*;
  import q2l_tb_pkg::*;
  localparam int NS = 4, AW = NS + 1, TW = 2, CS = 1 << NS;
  logic clk = 0, rst_n = 0;
  gate_kind_e kind;
  logic [TW-1:0] target, control;
  logic in_valid, in_ready, we, adv, re, s1_valid, s1_keep_orig, overlap;
  logic [AW-1:0] wa0, wa1, ra0, ra1;
  int checks = 0, failures = 0;
  int mem_chunk [2**AW], mem_label [2**AW];
  int wr_chunk = 0, wr_label = 0, rd_chunk = 0, rd_pair = 0;
  int c_chunk0, c_l0, c_l1, overlaps = 0, refused = 0;

  qpu_ctrl #(.N_SYSQBITS(NS)) dut (.*, .s1_keep_orig(s1_keep_orig));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (we) begin
      mem_chunk[wa0] <= wr_chunk; mem_label[wa0] <= wr_label;
      mem_chunk[wa1] <= wr_chunk; mem_label[wa1] <= wr_label + 1;
      if (wr_label + 2 == CS) begin wr_label <= 0; wr_chunk <= wr_chunk + 1; end
      else wr_label <= wr_label + 2;
    end
    if (overlap) overlaps++;
    // s1 (valid, keep) belongs to the read issued at the previous enabled
    // edge, whose labels were captured then; check it before it is replaced
    if (adv) begin
      if (s1_valid) begin
        logic exp_keep;
        int t, k;
        t = int'(target);
        k = int'(control);
        exp_keep = (kind == GATE_PASS) || (kind == GATE_CONTROLLED && ((c_l0 >> k) & 1) == 0);
        checks++;
        if (c_chunk0 != rd_chunk || c_l0 != swap01(2 * rd_pair, t) || c_l1 != swap01(2 * rd_pair + 1, t) ||
            ((c_l0 >> t) & 1) != 0 || (c_l0 ^ c_l1) != (1 << t) || s1_keep_orig != exp_keep) begin
          failures++;
          if (failures < 10)
            $display("pair %0d of chunk %0d: read chunk %0d labels %0d,%0d keep %0d", rd_pair, rd_chunk,
                     c_chunk0, c_l0, c_l1, s1_keep_orig);
        end
        if (rd_pair == CS / 2 - 1) begin rd_pair = 0; rd_chunk++; end
        else rd_pair++;
      end
      c_chunk0 <= mem_chunk[ra0];
      c_l0     <= mem_label[ra0];
      c_l1     <= mem_label[ra1];
    end
  end

  // in_ready may only drop when both banks hold unread chunks
  always @(negedge clk) if (rst_n && !in_ready) begin
    refused++;
    checks++;
    if (wr_chunk - rd_chunk < 2) begin failures++; $display("load refused with a free bank"); end
  end

  initial begin
    in_valid = 0; adv = 0; kind = GATE_UNARY; target = 0; control = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 12; phase++) begin
      int steady, start_chunk, accepted;
      // reconfigure only when the controller is empty
      wait (wr_chunk == rd_chunk && wr_label == 0);
      @(negedge clk);
      kind    = gate_kind_e'(phase % 3);
      target  = TW'(phase % NS);
      control = TW'((phase / 3) % NS == phase % NS ? (phase + 1) % NS : (phase / 3) % NS);
      steady  = (phase % 2 == 0);
      accepted = 0;
      for (int n = 0; n < 6 * CS; n++) begin
        in_valid = steady ? 1'b1 : 1'($urandom % 2);
        adv      = steady ? 1'b1 : 1'($urandom % 3 != 0);
        @(negedge clk);
        if (steady && n > 2 && n < 5 * CS / 2) begin
          checks++;
          if (!in_ready) begin failures++; $display("steady stream refused at %0d", n); end
        end
        // stop loading at a chunk boundary
        if (wr_label == 0 && n > 4 * CS) break;
      end
      in_valid = 0;
      adv = 1;
      repeat (CS + 10) @(negedge clk);
    end
    checks++;
    if (rd_chunk != wr_chunk || overlaps == 0 || refused == 0) begin
      failures++;
      $display("chunks written %0d read %0d, overlaps %0d, refusals %0d", wr_chunk, rd_chunk, overlaps, refused);
    end
    $display("chunks %0d, overlap cycles %0d, refusals %0d", wr_chunk, overlaps, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
