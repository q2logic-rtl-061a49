// qpu_sram: the 4-port double-buffered SRAM of a QPU.
//
// Two banks of 2^N_SYSQBITS complex amplitudes. The paper doubles the SRAM
// so that one chunk can be loaded while the previous one is computed; the
// bank is the top address bit. Two write ports take the two amplitudes of an
// incoming pair, whose bit-switched addresses always differ; two read ports
// deliver the pair at addresses 2k and 2k+1 of the other bank. Reads are
// synchronous and happen only while re is high (the QPU's pipeline enable),
// so read data holds during a stall. Read and write never touch the same
// bank in the same cycle (the controller guarantees it), so no read-during-
// write rule is needed. Port layout is this design's choice; the paper names
// the part "4-port double-buffered SRAM".
module qpu_sram
  import q2l_pkg::*;
#(
  parameter int unsigned N_SYSQBITS = 14,
  localparam int unsigned AW = N_SYSQBITS + 1
) (
  input  logic          clk,
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  cplx_t         wd0,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  cplx_t         wd1,
  input  logic          re,
  input  logic [AW-1:0] ra0,
  input  logic [AW-1:0] ra1,
  output cplx_t         rd0,
  output cplx_t         rd1
);
  cplx_t mem [2**AW];

  always_ff @(posedge clk) begin
    if (we0) mem[wa0] <= wd0;
    if (we1) mem[wa1] <= wd1;
    if (re) begin
      rd0 <= mem[ra0];
      rd1 <= mem[ra1];
    end
  end
endmodule
