// sub_bytes: SubBytes / InvSubBytes on a full 128-bit state.
//
// Eight dual-port S-box RAMs (sbox_bram) each look up two state bytes: RAM k
// serves bytes 2k and 2k+1 of the state (byte j = bits [127-8j -: 8]). The
// block's mode bit is prepended to every byte to form the 9-bit address, so
// one RAM serves both directions. The paper replicates the two-byte RAM
// eight times rather than time-sharing one, which keeps the loop free of
// internal feedback.
//
// Timing: dout is valid two clock edges after din/mode are presented (RAM
// read register plus RAM output register). No reset: the pipeline slot is
// cleared further down the loop, at add round key.
module sub_bytes
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   mode,
  input  state_t din,
  output state_t dout
);

  for (genvar k = 0; k < 8; k++) begin : g_ram
    sbox_bram u_ram (
      .clk    (clk),
      .addr_a ({mode, din[127 - 16*k -: 8]}),
      .addr_b ({mode, din[119 - 16*k -: 8]}),
      .dout_a (dout[127 - 16*k -: 8]),
      .dout_b (dout[119 - 16*k -: 8])
    );
  end

endmodule
