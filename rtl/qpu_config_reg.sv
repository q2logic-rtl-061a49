// qpu_config_reg: one QPU's slice of the 8-bit configuration chain.
//
// The paper moves the configuration bitstream through the accelerator as an
// 8-bit stream passing a shift register in every QPU, and reads each
// register afterwards as a record (a union in the original OpenCL). Here
// each valid byte shifts the 44-byte register by one byte; the byte pushed
// out at the far end goes to the next QPU one cycle later. After the whole
// bitstream has passed, the last QPU of the chain holds the first 44 bytes,
// so the host sends the records last QPU first. The register is read as
// q2l_pkg::qpu_cfg_t, first-arrived byte in the most significant position.
// Reset clears the record, which decodes as a unary gate with an all-zero
// matrix; the host always configures before streaming a state.
module qpu_config_reg
  import q2l_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic [7:0] in_byte,
  output logic      out_valid,
  output logic [7:0] out_byte,
  output qpu_cfg_t  cfg
);
  logic [CFG_BITS-1:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      out_valid <= 1'b0;
      out_byte  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_byte <= shreg[CFG_BITS-1 -: 8];
        shreg    <= {shreg[CFG_BITS-9:0], in_byte};
      end
    end
  end

  assign cfg = qpu_cfg_t'(shreg);
endmodule
