// qpu: quantum processing unit, applying one gate to a stream of amplitudes.
//
// The QPU splits the incoming stream into chunks of 2^N_SYSQBITS amplitudes
// and, within a chunk, applies the configured 2x2 complex matrix to every
// pair of amplitudes whose labels differ only in the target bit. Chunk n is
// loaded into one SRAM bank (through the bitswitch) while chunk n-1 is read
// from the other and computed, so in steady state two amplitudes enter and
// two leave every cycle. For a controlled gate the output multiplexer keeps
// the stored values wherever the control bit is 0 (a CNOT is a controlled
// gate whose matrix is Pauli-X). Gate kind, matrix, target and control come
// from the QPU's 44-byte record on the configuration chain.
//
// Output order: a pair leaves in SRAM address order, so within a chunk the
// output position is the arrival label with bit 0 and the target bit
// swapped. The next unit labels by arrival, so the schedule has to account
// for this swap (it is its own inverse, and a no-op for target 0).
//
// Stream interface: in_valid/in_ready/in_data and out_valid/out_ready/
// out_data, each carrying a pair, a transfer when valid and ready are both
// high. Latency: a chunk starts to leave 2^(N_SYSQBITS-1) + 4 cycles after
// its first pair arrived (fill the bank, SRAM read, three arithmetic
// stages), with no stall. On back-pressure (out_ready low with out_valid
// high) the whole compute pipeline holds.
// Structure, double buffering and the CNOT multiplexer follow the paper's
// figure; the pipeline depth, handshake and GATE_PASS are this design's.
module qpu
  import q2l_pkg::*;
#(
  parameter int unsigned N_SYSQBITS = 14
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration chain
  input  logic       cfg_in_valid,
  input  logic [7:0] cfg_in_byte,
  output logic       cfg_out_valid,
  output logic [7:0] cfg_out_byte,
  // amplitude stream
  input  logic       in_valid,
  output logic       in_ready,
  input  cpair_t     in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output cpair_t     out_data,
  // observation
  output logic       overlap,
  output logic       stall,
  output logic       kept
);
  localparam int unsigned AW = N_SYSQBITS + 1;
  localparam int unsigned TW = $clog2(N_SYSQBITS);
  localparam int unsigned MV_LAT = 3;

  qpu_cfg_t       cfg;
  logic           adv, we, re, s1_valid, s1_keep;
  logic [AW-1:0]  wa0, wa1, ra0, ra1;
  cpair_t         x;
  cpair_t         y;
  logic           mv_valid;
  cpair_t         x_d   [MV_LAT];
  logic [MV_LAT-1:0] keep_d;

  qpu_config_reg u_cfg (
    .clk, .rst_n,
    .in_valid(cfg_in_valid), .in_byte(cfg_in_byte),
    .out_valid(cfg_out_valid), .out_byte(cfg_out_byte),
    .cfg
  );

  qpu_ctrl #(.N_SYSQBITS(N_SYSQBITS)) u_ctrl (
    .clk, .rst_n,
    .kind(cfg.kind), .target(cfg.target[TW-1:0]), .control(cfg.control[TW-1:0]),
    .in_valid, .in_ready, .we, .wa0, .wa1,
    .adv, .re, .ra0, .ra1, .s1_valid, .s1_keep_orig(s1_keep),
    .overlap
  );

  qpu_sram #(.N_SYSQBITS(N_SYSQBITS)) u_sram (
    .clk,
    .we0(we), .wa0, .wd0(in_data[0]),
    .we1(we), .wa1, .wd1(in_data[1]),
    .re, .ra0, .ra1, .rd0(x[0]), .rd1(x[1])
  );

  matvec u_mv (
    .clk, .rst_n, .en(adv), .in_valid(s1_valid), .x,
    .a(cfg.a), .b(cfg.b), .c(cfg.c), .d(cfg.d),
    .out_valid(mv_valid), .y
  );

  // the stored pair and the multiplexer select travel beside the arithmetic
  always_ff @(posedge clk) begin
    if (adv) begin
      x_d[0]    <= x;
      keep_d[0] <= s1_keep;
      for (int i = 1; i < MV_LAT; i++) begin
        x_d[i]    <= x_d[i-1];
        keep_d[i] <= keep_d[i-1];
      end
    end
  end

  assign out_valid = mv_valid;
  assign out_data  = keep_d[MV_LAT-1] ? x_d[MV_LAT-1] : y;
  assign adv       = !out_valid || out_ready;
  assign stall     = out_valid && !out_ready;
  assign kept      = out_valid && out_ready && keep_d[MV_LAT-1];
endmodule
