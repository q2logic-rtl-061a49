// bitswitch: forms a QPU's SRAM write address from an arrival label.
//
// As in the paper, bit 0 of the label and the bit of the target qubit trade
// places, so that the two amplitudes a gate must combine (labels that differ
// only in the target bit) land in neighbouring SRAM words 2k and 2k+1 and
// can be read out as one pair. Swapping is its own inverse, so the same
// function maps an SRAM address back to the label stored there.
// Interface: W-bit label and a target bit index in, W-bit address out.
// Combinational.
module bitswitch #(
  parameter int unsigned W  = 14,
  localparam int unsigned TW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]  label,
  input  logic [TW-1:0] target,
  output logic [W-1:0]  addr
);
  always_comb begin
    addr = label;
    addr[0] = label[target];
    addr[target] = label[0];
  end
endmodule
