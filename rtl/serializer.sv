// serializer: turns wide memory words into a stream of amplitude pairs.
//
// The state reader fetches LANES complex amplitudes per wide read (2048 bits
// hold 32 of them); the QPUs take two per cycle. As in the paper's figure,
// a sequencer steps a multiplexer across the lanes of the word at the
// head of the input: pair k is lanes 2k and 2k+1, lane 0 being the lowest
// address. The input word is consumed (in_ready) together with its last
// pair, so a word takes LANES/2 output transfers and the serializer adds
// no latency of its own. Ports are valid/ready on both sides.
module serializer
  import q2l_pkg::*;
#(
  parameter int unsigned LANES = 32,
  localparam int unsigned SW = (LANES > 2) ? $clog2(LANES / 2) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  cplx_t [LANES-1:0]      in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output cpair_t                 out_data
);
  localparam int unsigned LAST = LANES / 2 - 1;

  logic [SW-1:0] seq;
  logic          last;

  assign last      = (seq == SW'(LAST));
  assign out_valid = in_valid;
  assign in_ready  = out_ready && last;

  always_comb begin
    out_data[0] = in_data[2 * seq];
    out_data[1] = in_data[2 * seq + 1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seq <= '0;
    else if (out_valid && out_ready) seq <= last ? '0 : seq + 1'b1;
  end
endmodule
