// state_reader: configures the QPU chain, then streams the state vector in.
//
// On start the reader first fetches the configuration bitstream,
// N_QPU records of 44 bytes, over its 8-bit read port and passes each
// returned byte straight onto the 8-bit configuration chain. When every
// byte has come back it reads the 2^num_qubits amplitudes of the state with
// wide reads of LANES amplitudes each (2048 bits for LANES = 32), in
// linear address order, and hands every returned word to the FIFO in front
// of the serializer. That FIFO has no room to refuse data, so the reader
// only issues a wide read while it holds a credit: it starts with
// FIFO_DEPTH credits, spends one per read and gets one back per word the
// FIFO releases (credit_return). done pulses for one cycle after the last
// word has returned.
// Both read ports are request/response: a request is taken when *_req and
// *_gnt are high; responses come back in order, one per cycle at most, with
// *_rvalid. The configuration port addresses bytes, the state port wide
// words. Reading the bitstream first and the state after it, the 8-bit and
// the wide port, and linear wide reads are the paper's; the handshakes and
// credit scheme are this design's.
module state_reader
  import q2l_pkg::*;
#(
  parameter int unsigned N_QPU      = 48,
  parameter int unsigned LANES      = 32,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned CRW = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [5:0]        num_qubits,
  input  logic [ADDR_W-1:0] cfg_base,   // byte address of the bitstream
  input  logic [ADDR_W-1:0] st_base,    // wide-word address of the state
  // 8-bit configuration read port
  output logic              cfg_req,
  input  logic              cfg_gnt,
  output logic [ADDR_W-1:0] cfg_addr,
  input  logic              cfg_rvalid,
  input  logic [7:0]        cfg_rdata,
  // wide state read port
  output logic              st_req,
  input  logic              st_gnt,
  output logic [ADDR_W-1:0] st_addr,
  input  logic              st_rvalid,
  input  cplx_t [LANES-1:0] st_rdata,
  // configuration chain and wide data out
  output logic              chain_valid,
  output logic [7:0]        chain_byte,
  output logic              word_valid,
  output cplx_t [LANES-1:0] word_data,
  input  logic              credit_return,
  output logic              busy,
  output logic              done
);
  localparam int unsigned CFG_TOTAL = N_QPU * CFG_BYTES;
  localparam int unsigned LW = $clog2(LANES);

  typedef enum logic [1:0] {S_IDLE, S_CFG, S_STATE} state_e;
  state_e            state;
  logic [ADDR_W:0]   issued, received, total;
  logic [CRW-1:0]    credits;
  logic              st_fire;

  assign cfg_req  = (state == S_CFG) && (issued < total);
  assign cfg_addr = cfg_base + issued[ADDR_W-1:0];
  assign st_req   = (state == S_STATE) && (issued < total) && (credits != '0);
  assign st_addr  = st_base + issued[ADDR_W-1:0];
  assign st_fire  = st_req && st_gnt;
  assign busy     = (state != S_IDLE);

  assign chain_valid = (state == S_CFG) && cfg_rvalid;
  assign chain_byte  = cfg_rdata;
  assign word_valid  = (state == S_STATE) && st_rvalid;
  assign word_data   = st_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      issued   <= '0;
      received <= '0;
      total    <= '0;
      credits  <= CRW'(FIFO_DEPTH);
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      credits <= credits - CRW'(st_fire) + CRW'(credit_return);
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_CFG;
          issued   <= '0;
          received <= '0;
          total    <= (ADDR_W+1)'(CFG_TOTAL);
        end
        S_CFG: begin
          if (cfg_req && cfg_gnt) issued <= issued + 1'b1;
          if (cfg_rvalid) begin
            received <= received + 1'b1;
            if (received + 1'b1 == total) begin
              state    <= S_STATE;
              issued   <= '0;
              received <= '0;
              total    <= (ADDR_W+1)'(1) << (num_qubits - 6'(LW));
            end
          end
        end
        S_STATE: begin
          if (st_fire) issued <= issued + 1'b1;
          if (st_rvalid) begin
            received <= received + 1'b1;
            if (received + 1'b1 == total) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_credit_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    credits <= CRW'(FIFO_DEPTH));
endmodule
