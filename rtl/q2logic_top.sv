// q2logic_top: the Q2Logic state-vector simulation pipeline.
//
// One run ("bitstream") of the pipeline reads a 2^num_qubits-amplitude state
// vector from memory, applies up to N_QPU gates to it, one per quantum
// processing unit (QPU), and writes the result back with its address bits
// rotated, ready for the next run:
//
//   state_reader -> wide FIFO -> serializer -> pair FIFO -> QPU 0 -> ... ->
//   QPU N_QPU-1 -> state_writer
//
// Before the state, the reader streams N_QPU 44-byte gate records through
// the 8-bit configuration chain that runs from the reader through every
// QPU (the record for the last QPU is sent first). A QPU works on chunks of
// 2^N_SYSQBITS amplitudes, so within one run gates may only touch the lowest
// N_SYSQBITS address bits; rotation between runs brings other qubits down.
// The default sizes are one of the paper's main configurations: 48 QPUs,
// N_SYSQBITS = 14 and 2048-bit state reads. FIFO depths are this design's.
//
// Memory side: an 8-bit configuration read port (byte addresses), a wide
// state read port (addresses in wide words of LANES amplitudes) and a
// two-lane amplitude write port (amplitude addresses); see state_reader and
// state_writer for the handshakes. The off-chip memory itself is outside the
// design. Host side: start (one cycle, while idle) with num_qubits
// (N_SYSQBITS <= num_qubits <= 32 and num_qubits >= log2(LANES)), the
// rotation to apply on write-back and the three base addresses; done pulses
// when the last amplitude has been written.
module q2logic_top
  import q2l_pkg::*;
#(
  parameter int unsigned N_QPU          = 48,
  parameter int unsigned N_SYSQBITS     = 14,
  parameter int unsigned B_LW           = 2048,
  parameter int unsigned RD_FIFO_DEPTH  = 8,
  parameter int unsigned SER_FIFO_DEPTH = 8,
  localparam int unsigned LANES = B_LW / 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host control
  input  logic                   start,
  input  logic [5:0]             num_qubits,
  input  logic signed [7:0]      rotate,
  input  logic [ADDR_W-1:0]      cfg_base,
  input  logic [ADDR_W-1:0]      rd_base,
  input  logic [ADDR_W-1:0]      wr_base,
  output logic                   busy,
  output logic                   done,
  // 8-bit configuration read port
  output logic                   cfg_req,
  input  logic                   cfg_gnt,
  output logic [ADDR_W-1:0]      cfg_addr,
  input  logic                   cfg_rvalid,
  input  logic [7:0]             cfg_rdata,
  // wide state read port
  output logic                   st_req,
  input  logic                   st_gnt,
  output logic [ADDR_W-1:0]      st_addr,
  input  logic                   st_rvalid,
  input  cplx_t [LANES-1:0]      st_rdata,
  // two-lane write port
  output logic                   wr_req,
  input  logic                   wr_gnt,
  output logic [1:0][ADDR_W-1:0] wr_addr,
  output cpair_t                 wr_data,
  // observation: one bit per mechanism, high in the cycles it happens
  output obs_t                   obs
);
  localparam int unsigned RPW = $clog2(RD_FIFO_DEPTH);
  localparam int unsigned SPW = $clog2(SER_FIFO_DEPTH);
  logic              rd_busy, rd_done, wr_busy;
  logic [RPW:0]      word_level;
  logic [SPW:0]      pair_level;
  logic              chain_valid [N_QPU+1];
  logic [7:0]        chain_byte  [N_QPU+1];
  logic              word_valid, wf_out_valid, wf_out_ready, wf_in_ready;
  cplx_t [LANES-1:0] word_data, wf_out_data;
  logic              ser_valid, ser_ready;
  cpair_t            ser_data;
  logic              s_valid [N_QPU+1];
  logic              s_ready [N_QPU+1];
  cpair_t            s_data  [N_QPU+1];
  logic              qpu_overlap [N_QPU];
  logic              qpu_stall   [N_QPU];
  logic              qpu_kept    [N_QPU];

  state_reader #(.N_QPU(N_QPU), .LANES(LANES), .FIFO_DEPTH(RD_FIFO_DEPTH)) u_reader (
    .clk, .rst_n, .start, .num_qubits, .cfg_base, .st_base(rd_base),
    .cfg_req, .cfg_gnt, .cfg_addr, .cfg_rvalid, .cfg_rdata,
    .st_req, .st_gnt, .st_addr, .st_rvalid, .st_rdata,
    .chain_valid(chain_valid[0]), .chain_byte(chain_byte[0]),
    .word_valid, .word_data,
    .credit_return(wf_out_valid && wf_out_ready),
    .busy(rd_busy), .done(rd_done)
  );

  stream_fifo #(.WIDTH(LANES * 64), .DEPTH(RD_FIFO_DEPTH)) u_word_fifo (
    .clk, .rst_n,
    .in_valid(word_valid), .in_ready(wf_in_ready), .in_data(word_data),
    .out_valid(wf_out_valid), .out_ready(wf_out_ready), .out_data(wf_out_data),
    .count(word_level)
  );

  serializer #(.LANES(LANES)) u_ser (
    .clk, .rst_n,
    .in_valid(wf_out_valid), .in_ready(wf_out_ready), .in_data(wf_out_data),
    .out_valid(ser_valid), .out_ready(ser_ready), .out_data(ser_data)
  );

  stream_fifo #(.WIDTH(128), .DEPTH(SER_FIFO_DEPTH)) u_pair_fifo (
    .clk, .rst_n,
    .in_valid(ser_valid), .in_ready(ser_ready), .in_data(ser_data),
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(s_data[0]),
    .count(pair_level)
  );

  for (genvar i = 0; i < N_QPU; i++) begin : g_qpu
    qpu #(.N_SYSQBITS(N_SYSQBITS)) u_qpu (
      .clk, .rst_n,
      .cfg_in_valid(chain_valid[i]), .cfg_in_byte(chain_byte[i]),
      .cfg_out_valid(chain_valid[i+1]), .cfg_out_byte(chain_byte[i+1]),
      .in_valid(s_valid[i]), .in_ready(s_ready[i]), .in_data(s_data[i]),
      .out_valid(s_valid[i+1]), .out_ready(s_ready[i+1]), .out_data(s_data[i+1]),
      .overlap(qpu_overlap[i]), .stall(qpu_stall[i]), .kept(qpu_kept[i])
    );
  end

  state_writer u_writer (
    .clk, .rst_n, .start, .num_qubits, .rotate, .wr_base,
    .in_valid(s_valid[N_QPU]), .in_ready(s_ready[N_QPU]), .in_data(s_data[N_QPU]),
    .wr_req, .wr_gnt, .wr_addr, .wr_data,
    .busy(wr_busy), .done
  );

  assign busy = rd_busy || wr_busy;

  always_comb begin
    obs = '0;
    obs.reader_done     = rd_done;
    obs.word_fifo_full  = (word_level == (RPW+1)'(RD_FIFO_DEPTH));
    obs.pair_fifo_full  = (pair_level == (SPW+1)'(SER_FIFO_DEPTH));
    obs.write_stall     = wr_req && !wr_gnt;
    for (int i = 0; i < N_QPU; i++) begin
      obs.qpu_overlap = obs.qpu_overlap | qpu_overlap[i];
      obs.qpu_stall   = obs.qpu_stall   | qpu_stall[i];
      obs.qpu_kept    = obs.qpu_kept    | qpu_kept[i];
    end
  end

  // the reader's credits keep the word FIFO from overflowing
  a_word_fifo_room: assert property (@(posedge clk) disable iff (!rst_n)
    word_valid |-> wf_in_ready);
endmodule
