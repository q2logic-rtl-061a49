// ddr_model: behavioural model of the external memory seen by the pipeline.
//
// Not part of the design: a testbench stand-in for the board's DDR4 banks
// and their controller. It serves the three ports of q2logic_top. Requests
// are granted at random (gnt_pct: grant probability in percent of the
// read ports, wr_pct: of the write port) and read
// responses return in order after a fixed LATENCY cycles. Storage is a byte
// array for configuration bitstreams and an amplitude array for states;
// a wide state word at word address w holds amplitudes w*LANES ..
// w*LANES+LANES-1, lane 0 lowest. Testbenches fill and inspect the arrays
// through hierarchical references.
module ddr_model
  import q2l_pkg::*;
#(
  parameter int unsigned LANES     = 32,
  parameter int unsigned CFG_SIZE  = 4096,
  parameter int unsigned AMP_SIZE  = 65536,
  parameter int unsigned LATENCY   = 6
) (
  input  logic                   clk,
  input  int unsigned            gnt_pct,
  input  int unsigned            wr_pct,
  input  logic                   cfg_req,
  output logic                   cfg_gnt,
  input  logic [ADDR_W-1:0]      cfg_addr,
  output logic                   cfg_rvalid,
  output logic [7:0]             cfg_rdata,
  input  logic                   st_req,
  output logic                   st_gnt,
  input  logic [ADDR_W-1:0]      st_addr,
  output logic                   st_rvalid,
  output cplx_t [LANES-1:0]      st_rdata,
  input  logic                   wr_req,
  output logic                   wr_gnt,
  input  logic [1:0][ADDR_W-1:0] wr_addr,
  input  cpair_t                 wr_data
);
  logic [7:0] cfg_mem [CFG_SIZE];
  cplx_t      amp     [AMP_SIZE];
  int unsigned writes = 0;

  logic [LATENCY-1:0]  cfg_pipe_v = '0, st_pipe_v = '0;
  logic [7:0]          cfg_pipe_d [LATENCY];
  cplx_t [LANES-1:0]   st_pipe_d  [LATENCY];

  always @(negedge clk) begin
    cfg_gnt <= ($urandom % 100) < gnt_pct;
    st_gnt  <= ($urandom % 100) < gnt_pct;
    wr_gnt  <= ($urandom % 100) < wr_pct;
  end

  always @(posedge clk) begin
    cfg_pipe_v <= {cfg_pipe_v[LATENCY-2:0], cfg_req && cfg_gnt};
    st_pipe_v  <= {st_pipe_v[LATENCY-2:0],  st_req && st_gnt};
    for (int i = LATENCY - 1; i > 0; i--) begin
      cfg_pipe_d[i] <= cfg_pipe_d[i-1];
      st_pipe_d[i]  <= st_pipe_d[i-1];
    end
    cfg_pipe_d[0] <= cfg_mem[cfg_addr % CFG_SIZE];
    for (int l = 0; l < LANES; l++)
      st_pipe_d[0][l] <= amp[(st_addr * LANES + l) % AMP_SIZE];
    if (wr_req && wr_gnt) begin
      amp[wr_addr[0] % AMP_SIZE] <= wr_data[0];
      amp[wr_addr[1] % AMP_SIZE] <= wr_data[1];
      writes <= writes + 2;
    end
  end

  assign cfg_rvalid = cfg_pipe_v[LATENCY-1];
  assign cfg_rdata  = cfg_pipe_d[LATENCY-1];
  assign st_rvalid  = st_pipe_v[LATENCY-1];
  assign st_rdata   = st_pipe_d[LATENCY-1];
endmodule
