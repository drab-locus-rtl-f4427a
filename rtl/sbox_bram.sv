// sbox_bram: one dual-port block RAM used as the S-box ROM of the sub bytes
// transformation (two state bytes per RAM).
//
// The 512 x 8 table holds the S-box at addresses 0..255 (2,048 bits) and the
// inverse S-box at 256..511, so a port address is {mode, byte}: the block's
// mode bit picks the encryption or the decryption half. Both ports are
// read-only and fully independent, as in a true dual-port block RAM.
//
// Timing: two cycles. The first register is the RAM's synchronous read, the
// second its optional output register, which the design enables to shorten
// the path leaving the RAM. Neither register has a reset.
//
// The table layout, the 9-bit {mode, byte} addressing and the two registers
// follow the paper's sub bytes figure; the contents are computed at
// elaboration from the GF(2^8) definition instead of being loaded from a file.
module sbox_bram
  import aes_pkg::*;
(
  input  logic       clk,
  input  logic [8:0] addr_a,
  input  logic [8:0] addr_b,
  output byte_t      dout_a,
  output byte_t      dout_b
);

  byte_t rom [512];

  // Contents: powers of the generator 03 give exp/log tables, the inverse
  // of x is 03^(255 - log x), and the FIPS-197 affine map follows. The
  // inverse S-box entry is filled at the S-box output's address.
  initial begin
    byte_t ex [256];
    byte_t lg [256];
    byte_t e, inv, s;
    e = 8'h01;
    for (int i = 0; i < 255; i++) begin
      ex[i] = e;
      lg[e] = byte_t'(i);
      e = xtime(e) ^ e;
    end
    for (int i = 0; i < 256; i++) begin
      inv = (i == 0) ? 8'h00 : ex[(255 - int'(lg[i])) % 255];
      s   = inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
      rom[i]     = s;
      rom[256 + int'(s)] = byte_t'(i);
    end
  end

  byte_t rd_a, rd_b;

  always_ff @(posedge clk) begin
    rd_a   <= rom[addr_a];
    rd_b   <= rom[addr_b];
    dout_a <= rd_a;
    dout_b <= rd_b;
  end

endmodule
