// key_ram: the round-key memory, a true dual-port RAM of 32 x 128 bits
// (four 32-bit wide block RAMs side by side in the paper's implementation).
//
// The address is {mode, round}: mode 0 holds the encryption round keys
// K1..K10 at rounds 1..10; mode 1 holds the equivalent-inverse-cipher keys,
// InvMixColumns(K(10-r)) at rounds 1..9 and K0 at round 10, so that for both
// modes round r of the round loop reads address {mode, r} and the final
// round reads {mode, 10}.
//
// Port A reads and writes (the key schedule writes through it during key
// expansion and reads the per-slot round key during operation); port B only
// reads and serves the final round key. Reads are synchronous: data appears
// one clock edge after the address. Contents are not reset.
module key_ram
  import aes_pkg::*;
(
  input  logic       clk,
  input  logic [4:0] addr_a,
  input  logic       we_a,
  input  state_t     wdata_a,
  output state_t     rdata_a,
  input  logic [4:0] addr_b,
  output state_t     rdata_b
);

  state_t mem [32];

  always_ff @(posedge clk) begin
    if (we_a) mem[addr_a] <= wdata_a;
    rdata_a <= mem[addr_a];
    rdata_b <= mem[addr_b];
  end

endmodule
