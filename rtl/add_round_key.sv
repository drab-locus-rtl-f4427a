// add_round_key: 128-bit XOR of the state with a round key in three parallel
// DSP slices (two 48-bit lanes and one 32-bit lane).
//
// IN_REGS sets the depth of the A/B input registers: the paper uses two in
// the round-loop instance, where the inputs come from the mix columns DSPs and
// the key RAM, and one in the initial and final instances, which connect only
// to the key schedule. The P output register is always used, so the latency
// is IN_REGS + 1 cycles (3 in the loop, 2 outside it).
//
// rst is the slices' synchronous output reset: while high at a clock edge the
// output loads zero. The controller uses it to empty a slot of the loop, so a
// new block can be merged in with an OR gate, and to keep all three instances
// at zero during key expansion.
module add_round_key
  import aes_pkg::*;
#(
  parameter int unsigned IN_REGS = 2
) (
  input  logic   clk,
  input  logic   rst,
  input  state_t state,
  input  state_t key,
  output state_t dout
);

  localparam int unsigned LANE_W [3]  = '{48, 48, 32};
  localparam int unsigned LANE_LO [3] = '{80, 32, 0};

  for (genvar l = 0; l < 3; l++) begin : g_lane
    localparam int unsigned W  = LANE_W[l];
    localparam int unsigned LO = LANE_LO[l];
    dsp_xor #(.WIDTH(W), .AREG(IN_REGS), .BREG(IN_REGS)) u_dsp (
      .clk(clk), .rst_p(rst),
      .a(state[LO +: W]), .b(key[LO +: W]), .pcin('0), .p(dout[LO +: W])
    );
  end

endmodule
