// qpu_ctrl: the control and state logic of a QPU.
//
// Load side (paper, QPU steps 1-2): values arrive two per cycle and are
// labelled by arrival order within the current chunk of 2^N_SYSQBITS
// values; each label goes through the bitswitch to give its SRAM address in
// the bank being loaded. When the last pair of a chunk is written the bank
// is marked full and loading moves to the other bank. in_ready is low while
// the bank to be loaded is still full, which is the only back-pressure a QPU
// applies upstream.
// Compute side (paper, steps 3-4): a full bank is read in address order,
// words 2k and 2k+1 per cycle, while adv (the pipeline enable) is high; after
// its last pair the bank is released. Each pair read is tagged with
// keep_orig, which tells the output multiplexer to pass the stored values
// instead of the matrix product: for a controlled gate where the control
// qubit is 0, and always for a QPU the schedule leaves idle (GATE_PASS).
// The control bit is taken from the original label, that is the SRAM
// address bit-switched back. s1_valid/s1_keep_orig are aligned with the
// SRAM read data, one enabled cycle after the read is issued.
// The double buffering and the label/bitswitch scheme are the paper's; the
// full flags, the handshake and the GATE_PASS kind are this design's.
module qpu_ctrl
  import q2l_pkg::*;
#(
  parameter int unsigned N_SYSQBITS = 14,
  localparam int unsigned AW = N_SYSQBITS + 1,
  localparam int unsigned TW = $clog2(N_SYSQBITS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  gate_kind_e    kind,
  input  logic [TW-1:0] target,
  input  logic [TW-1:0] control,
  // load side
  input  logic          in_valid,
  output logic          in_ready,
  output logic          we,
  output logic [AW-1:0] wa0,
  output logic [AW-1:0] wa1,
  // compute side
  input  logic          adv,
  output logic          re,
  output logic [AW-1:0] ra0,
  output logic [AW-1:0] ra1,
  output logic          s1_valid,
  output logic          s1_keep_orig,
  // load and compute in the same cycle, for observation
  output logic          overlap
);
  localparam int unsigned CW = N_SYSQBITS - 1;   // pair counter width

  logic          wr_bank, rd_bank;
  logic [CW-1:0] wr_cnt, rd_cnt;
  logic [1:0]    full;
  logic [N_SYSQBITS-1:0] sw0, sw1;
  logic          wr_fire, rd_issue, ctl_bit, keep;

  bitswitch #(.W(N_SYSQBITS)) u_bsw0 (.label({wr_cnt, 1'b0}), .target(target), .addr(sw0));
  bitswitch #(.W(N_SYSQBITS)) u_bsw1 (.label({wr_cnt, 1'b1}), .target(target), .addr(sw1));

  assign in_ready = !full[wr_bank];
  assign wr_fire  = in_valid && in_ready;
  assign we       = wr_fire;
  assign wa0      = {wr_bank, sw0};
  assign wa1      = {wr_bank, sw1};

  assign rd_issue = full[rd_bank] && adv;
  assign re       = adv;
  assign ra0      = {rd_bank, rd_cnt, 1'b0};
  assign ra1      = {rd_bank, rd_cnt, 1'b1};

  // control bit of the original label of the pair at words 2k, 2k+1
  always_comb begin
    logic [N_SYSQBITS-1:0] a;
    a = {rd_cnt, 1'b0};
    if (control == '0)          ctl_bit = a[target];
    else if (control == target) ctl_bit = a[0];
    else                        ctl_bit = a[control];
    keep = (kind == GATE_PASS) || (kind == GATE_CONTROLLED && !ctl_bit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank      <= 1'b0;
      rd_bank      <= 1'b0;
      wr_cnt       <= '0;
      rd_cnt       <= '0;
      full         <= '0;
      s1_valid     <= 1'b0;
      s1_keep_orig <= 1'b0;
    end else begin
      if (wr_fire) begin
        wr_cnt <= wr_cnt + 1'b1;
        if (wr_cnt == '1) begin
          full[wr_bank] <= 1'b1;
          wr_bank       <= ~wr_bank;
        end
      end
      if (rd_issue) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt == '1) begin
          full[rd_bank] <= 1'b0;
          rd_bank       <= ~rd_bank;
        end
      end
      if (adv) begin
        s1_valid     <= rd_issue;
        s1_keep_orig <= keep;
      end
    end
  end

  assign overlap   = wr_fire && rd_issue;

  // the bank being loaded is never the bank being read
  a_bank_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_fire && rd_issue && wr_bank == rd_bank))
    else $error("qpu_ctrl: load and compute on the same bank");
endmodule
