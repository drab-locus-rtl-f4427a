// mc_bram: one dual-port block RAM holding the byte products for mix columns
// (two state bytes per RAM).
//
// Entry x (0..255) holds {x*02, x*01, x*01, x*03}, the products of x with the
// four distinct coefficients of the MixColumns matrix; entry 256+x holds
// {x*0E, x*09, x*0D, x*0B} for InvMixColumns. The coefficient order is that of
// the paper's storage figure and is the same for both halves, so the wiring
// that lines the products up for the XOR tree does not depend on the mode.
// Port address = {mode, byte}.
//
// Timing: two cycles, the synchronous read and the RAM's output register,
// without reset. Contents are computed at elaboration by repeated doubling (xtime).
module mc_bram
  import aes_pkg::*;
(
  input  logic        clk,
  input  logic [8:0]  addr_a,
  input  logic [8:0]  addr_b,
  output logic [31:0] dout_a,
  output logic [31:0] dout_b
);

  logic [31:0] rom [512];

  // Products by doubling: x2 = x*02, x4 = x*04, x8 = x*08, then
  // 03 = 02^01, 09 = 08^01, 0B = 08^02^01, 0D = 08^04^01, 0E = 08^04^02.
  initial begin
    byte_t x, x2, x4, x8;
    for (int i = 0; i < 256; i++) begin
      x  = byte_t'(i);
      x2 = xtime(x);
      x4 = xtime(x2);
      x8 = xtime(x4);
      rom[i]       = {x2, x, x, x2 ^ x};
      rom[256 + i] = {x8 ^ x4 ^ x2, x8 ^ x, x8 ^ x4 ^ x, x8 ^ x2 ^ x};
    end
  end

  logic [31:0] rd_a, rd_b;

  always_ff @(posedge clk) begin
    rd_a   <= rom[addr_a];
    rd_b   <= rom[addr_b];
    dout_a <= rd_a;
    dout_b <= rd_b;
  end

endmodule
