// state_writer: writes the final stream back to memory at rotated addresses.
//
// Each arriving amplitude is labelled with its arrival index; as in the
// paper, the label is rotated across the num_qubits address bits before it
// is used as the write address, which re-maps qubits for the next bitstream:
// the qubits that sit at label bits r..r+N_SYSQBITS-1 now will sit at bits
// 0..N_SYSQBITS-1 in memory, where the next pass of the QPUs sees them.
// With rotate = r (taken modulo num_qubits, negative values allowed),
// address bit i = label bit (i + r) mod num_qubits, i.e. a right rotation by
// r; this sign convention matches the worked example in the paper's
// figure (rotate 2, then rotate -1, on a 4-qubit state).
// Pairs arrive two amplitudes at a time; each pair leaves as one request on
// a two-lane write port (two 64-bit writes with their own addresses), taken
// when wr_req and wr_gnt are both high, through one output register. start
// latches num_qubits, rotate and the base address; done pulses once
// 2^num_qubits amplitudes have been written.
module state_writer
  import q2l_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [5:0]             num_qubits,
  input  logic signed [7:0]      rotate,
  input  logic [ADDR_W-1:0]      wr_base,   // amplitude address of the result
  // amplitude stream in
  input  logic                   in_valid,
  output logic                   in_ready,
  input  cpair_t                 in_data,
  // two-lane write port
  output logic                   wr_req,
  input  logic                   wr_gnt,
  output logic [1:0][ADDR_W-1:0] wr_addr,
  output cpair_t                 wr_data,
  output logic                   busy,
  output logic                   done
);
  logic [5:0]        q;
  logic [5:0]        rot;
  logic [ADDR_W-1:0] base;
  logic [ADDR_W:0]   label, remaining;
  logic [ADDR_W-1:0] l0, l1, r0, r1;
  logic              in_fire, out_fire;

  function automatic logic [ADDR_W-1:0] rotr(logic [ADDR_W-1:0] l, logic [5:0] r, logic [5:0] n);
    logic [ADDR_W-1:0] o;
    o = '0;
    for (int i = 0; i < ADDR_W; i++) begin
      int j;
      j = i + int'(r);
      if (j >= int'(n)) j = j - int'(n);
      if (i < int'(n)) o[i] = l[j[4:0]];
    end
    return o;
  endfunction

  // Rotation reduced to 0 .. num_qubits-1 when a run starts (the remainder
  // of a signed division takes the dividend's sign, so negatives are lifted).
  logic signed [8:0] rot_rem;
  logic [5:0]        rot_start;
  always_comb begin
    rot_rem = '0;
    if (num_qubits != '0) begin
      rot_rem = $signed({rotate[7], rotate}) % $signed({3'b000, num_qubits});
      if (rot_rem < 0) rot_rem = rot_rem + $signed({3'b000, num_qubits});
    end
    rot_start = rot_rem[5:0];
  end

  assign l0 = {label[ADDR_W-1:1], 1'b0};
  assign l1 = {label[ADDR_W-1:1], 1'b1};
  assign r0 = rotr(l0, rot, q);
  assign r1 = rotr(l1, rot, q);

  assign in_ready = busy && (!wr_req || wr_gnt);
  assign in_fire  = in_valid && in_ready;
  assign out_fire = wr_req && wr_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q         <= '0;
      rot       <= '0;
      base      <= '0;
      label     <= '0;
      remaining <= '0;
      wr_req    <= 1'b0;
      wr_addr   <= '0;
      wr_data   <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q         <= num_qubits;
        rot       <= rot_start;
        base      <= wr_base;
        label     <= '0;
        remaining <= (ADDR_W+1)'(1) << (num_qubits - 6'd1);
        busy      <= 1'b1;
      end else begin
        if (in_fire) begin
          wr_req     <= 1'b1;
          wr_addr[0] <= base + r0;
          wr_addr[1] <= base + r1;
          wr_data    <= in_data;
          label      <= label + (ADDR_W+1)'(2);
        end else if (out_fire) begin
          wr_req <= 1'b0;
        end
        if (out_fire) begin
          remaining <= remaining - 1'b1;
          if (remaining == (ADDR_W+1)'(1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
