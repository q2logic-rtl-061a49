// stream_fifo: synchronous first-in first-out buffer with valid/ready ports.
//
// Used where the architecture drawing places FIFOs: between the state
// reader and the serializer (one wide word per entry) and between the
// serializer and the first QPU (one amplitude pair per entry). Depth and
// width are parameters; the paper gives neither. DEPTH must be a power of
// two. A push happens when in_valid and in_ready are high (in_ready means
// not full); a pop when out_valid and out_ready are high (out_valid means
// not empty). The head entry is presented combinationally, so an entry
// written in one cycle can be popped in the next. count gives the fill level.
module stream_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [PW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count < (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH));
endmodule
