// aes_datapath: the DRAB-LOCUS round datapath, one instance of each AES
// sub-round transformation in a 12-stage iterative loop, plus separate
// initial and final add round key instances.
//
//   in_block -> ARK_init (2) -+
//                             OR -> SUB_BYTES (2) -> SHIFT_ROWS (1) -+-> OR -> MIX_COLUMNS (6) -> ARK_loop (3) -+
//              ks_sb_in -----+                       |               |    ^                                     |
//                ^  +--------------------------------|---------------|----|-------------------------------------+
//                                                     |               +-> ARK_final (2) -> out_block
// (stage counts in brackets). The loop is 2 + 1 + 6 + 3 = 12 stages. A block
// makes 9 passes (rounds 1..9), then a tenth pass as far as shift rows,
// whose output goes to the final add round key.
//
// The multiplexers in front of sub bytes and mix columns are OR gates: every
// source other than the one in use is held at zero by its own reset (add
// round key outputs, shift rows) or by the key schedule (its taps are zero
// outside key expansion). sb_tap and mc_tap return the sub bytes and mix
// columns outputs to the key schedule.
//
// Modes: sb_mode goes with the loop-entry data, sr_mode with the sub bytes
// output, mc_mode with the shift rows output; ks_mc_mode is OR-ed into the
// mix columns mode during key expansion. Keys: init_key is captured with
// in_block; loop_key one cycle after the mix columns output appears;
// final_key with the shift rows output.
module aes_datapath
  import aes_pkg::*;
(
  input  logic   clk,
  // initial round
  input  state_t in_block,
  input  state_t init_key,
  input  logic   ark5_rst,
  // loop control
  input  logic   sb_mode,
  input  logic   sr_rst,
  input  logic   sr_mode,
  input  logic   mc_mode,
  input  state_t loop_key,
  input  logic   ark4_rst,
  // final round
  input  state_t final_key,
  input  logic   ark6_rst,
  // key schedule taps
  input  state_t ks_sb_in,
  input  state_t ks_mc_in,
  input  logic   ks_mc_mode,
  output state_t sb_tap,
  output state_t mc_tap,
  // result
  output state_t out_block
);

  state_t ark_init_out, ark_loop_out, loop_in, sb_out, sr_out, mc_in, mc_out;

  add_round_key #(.IN_REGS(1)) u_ark_init (
    .clk(clk), .rst(ark5_rst), .state(in_block), .key(init_key), .dout(ark_init_out)
  );

  assign loop_in = ks_sb_in | ark_init_out | ark_loop_out;

  sub_bytes u_sb (.clk(clk), .mode(sb_mode), .din(loop_in), .dout(sb_out));

  shift_rows u_sr (.clk(clk), .rst(sr_rst), .mode(sr_mode), .din(sb_out), .dout(sr_out));

  assign mc_in = sr_out | ks_mc_in;

  mix_columns u_mc (.clk(clk), .mode(mc_mode | ks_mc_mode), .din(mc_in), .dout(mc_out));

  add_round_key #(.IN_REGS(2)) u_ark_loop (
    .clk(clk), .rst(ark4_rst), .state(mc_out), .key(loop_key), .dout(ark_loop_out)
  );

  add_round_key #(.IN_REGS(1)) u_ark_final (
    .clk(clk), .rst(ark6_rst), .state(sr_out), .key(final_key), .dout(out_block)
  );

  assign sb_tap = sb_out;
  assign mc_tap = mc_out;

endmodule
