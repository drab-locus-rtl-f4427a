// dsp_xor: the part of a DSP48E1-style slice the design uses, a wide XOR.
//
// P <= A' ^ B' ^ PCIN, where A' and B' are A and B delayed by AREG and BREG
// input registers (0, 1 or 2 each, as in the slice's two-deep A/B pipelines)
// and PCIN is the cascade input from the slice below, taken without delay.
// The output register P is always used. rst_p is the slice's synchronous
// output reset: while it is high at a clock edge, P loads zero, which is how
// the controller empties a pipeline slot.
//
// Latency from A/B to P is max(AREG, BREG) + 1 when both are equal; callers
// line the paths up themselves. The register depths follow the paper; the
// slice is modelled with plain fabric logic, not a vendor primitive.
module dsp_xor #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned AREG  = 1,
  parameter int unsigned BREG  = 1
) (
  input  logic             clk,
  input  logic             rst_p,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] pcin,
  output logic [WIDTH-1:0] p
);

  logic [WIDTH-1:0] a_q [AREG+1];
  logic [WIDTH-1:0] b_q [BREG+1];

  assign a_q[0] = a;
  assign b_q[0] = b;

  for (genvar i = 1; i <= AREG; i++) begin : g_areg
    always_ff @(posedge clk) a_q[i] <= a_q[i-1];
  end
  for (genvar i = 1; i <= BREG; i++) begin : g_breg
    always_ff @(posedge clk) b_q[i] <= b_q[i-1];
  end

  always_ff @(posedge clk) begin
    if (rst_p) p <= '0;
    else       p <= a_q[AREG] ^ b_q[BREG] ^ pcin;
  end

endmodule
