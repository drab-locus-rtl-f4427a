// mix_columns: MixColumns / InvMixColumns as a RAM look-up followed by a
// cascaded DSP XOR tree.
//
// Step 1, byte multiplication: eight dual-port mc_bram RAMs look up every
// state byte x at {mode, x} and return the four products of x with the
// matrix coefficients, {x*02, x*01, x*01, x*03} (enc) or
// {x*0E, x*09, x*0D, x*0B} (dec), named p0..p3 from the top byte down.
//
// Step 2, wide XOR: the products are arranged into four 128-bit vectors
// Vec_i, i = 0..3, where byte (r,c) of Vec_i is product p[(r-i) mod 4] of
// input byte s(i,c). Output byte (r,c) is then Vec_0 ^ Vec_1 ^ Vec_2 ^ Vec_3
// at that byte, for both modes, because both matrices are circulant with the
// same coefficient order. The vectors are cut into a high 48-bit, a middle
// 48-bit and a low 32-bit lane; each lane is a cascade of three DSP slices:
//   DSP1: P1 = Vec_0 ^ Vec_1      (A and B one input register each)
//   DSP2: P2 = P1 ^ Vec_2         (Vec_2 through both A registers)
//   DSP3: P3 = P2 ^ Vec_3         (Vec_3 through one fabric register and
//                                  both A registers: three cycles)
// This is the arrangement of the paper's appendix equations, extended from
// the high lane it writes out to the middle and low lanes.
//
// Timing: six cycles from din/mode to dout (two RAM stages, four DSP stages).
// No reset: the loop is cleared at add round key.
module mix_columns
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   mode,
  input  state_t din,
  output state_t dout
);

  // q[j]: the four products of input byte j (= s(j%4, j/4)).
  logic [31:0] q [16];

  for (genvar k = 0; k < 8; k++) begin : g_ram
    mc_bram u_ram (
      .clk    (clk),
      .addr_a ({mode, din[127 - 16*k -: 8]}),
      .addr_b ({mode, din[119 - 16*k -: 8]}),
      .dout_a (q[2*k]),
      .dout_b (q[2*k+1])
    );
  end

  state_t vec [4];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      for (int c = 0; c < 4; c++) begin
        for (int r = 0; r < 4; r++) begin
          vec[i][127 - 8 * (4 * c + r) -: 8] = q[4 * c + i][31 - 8 * ((r + 4 - i) % 4) -: 8];
        end
      end
    end
  end

  // Third delay cycle for Vec_3, in fabric flip-flops.
  state_t vec3_q;
  always_ff @(posedge clk) vec3_q <= vec[3];

  localparam int unsigned LANE_W [3]  = '{48, 48, 32};
  localparam int unsigned LANE_LO [3] = '{80, 32, 0};

  for (genvar l = 0; l < 3; l++) begin : g_lane
    localparam int unsigned W  = LANE_W[l];
    localparam int unsigned LO = LANE_LO[l];
    logic [W-1:0] p1, p2, p3;

    dsp_xor #(.WIDTH(W), .AREG(1), .BREG(1)) u_dsp1 (
      .clk(clk), .rst_p(1'b0),
      .a(vec[0][LO +: W]), .b(vec[1][LO +: W]), .pcin('0), .p(p1)
    );
    dsp_xor #(.WIDTH(W), .AREG(2), .BREG(0)) u_dsp2 (
      .clk(clk), .rst_p(1'b0),
      .a(vec[2][LO +: W]), .b('0), .pcin(p1), .p(p2)
    );
    dsp_xor #(.WIDTH(W), .AREG(2), .BREG(0)) u_dsp3 (
      .clk(clk), .rst_p(1'b0),
      .a(vec3_q[LO +: W]), .b('0), .pcin(p2), .p(p3)
    );

    assign dout[LO +: W] = p3;
  end

endmodule
