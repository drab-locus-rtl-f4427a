// shift_rows: ShiftRows / InvShiftRows switch with a 128-bit output register.
//
// Row r of the state is rotated left by r byte positions when mode is 0
// (encryption) and right by r positions when mode is 1 (decryption):
//   enc: out(r,c) = in(r, (c+r) mod 4)    dec: out(r,c) = in(r, (c-r) mod 4)
// The per-byte two-way selection is the "switch made of LUTs" of the paper,
// and the result is registered in fabric flip-flops, which the paper places
// between the sub bytes and mix columns RAMs to shorten the routing between
// them.
//
// Timing: one cycle. rst is synchronous and clears the register; the
// controller holds it while the key schedule uses the datapath, so the mix
// columns input sees only the key schedule's operand.
module shift_rows
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   mode,
  input  state_t din,
  output state_t dout
);

  state_t shifted;

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 4; r++) begin
        shifted[127 - 8 * (4 * c + r) -: 8] =
          mode ? get_byte(din, r, (c + 4 - r) % 4)
               : get_byte(din, r, (c + r) % 4);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else     dout <= shifted;
  end

endmodule
