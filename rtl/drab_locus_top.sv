// drab_locus_top: DRAB-LOCUS AES-128 core, encryption and decryption
// interleaved block by block in one 12-stage iterative pipeline.
//
// Interface (all synchronous to clk, rst_n active low and synchronous):
//   key_valid/key_ready/key : load a 128-bit cipher key. After reset the core
//       first flushes its tracking shift registers (113 cycles), then accepts
//       a key and expands it (94 cycles) before it accepts blocks. A later
//       key is taken once all blocks in flight have left; while key_valid is
//       high no new block is accepted.
//   in_valid/in_ready/in_mode/in_block : one 128-bit block per handshake;
//       in_mode 0 encrypts, 1 decrypts, chosen freely per block. in_ready
//       drops when the pipeline slot the block would take is busy.
//   out_valid/out_mode/out_block : one cycle per finished block. Blocks leave
//       in the order they complete, which for blocks accepted at different
//       times is their input order.
//   idle : no block in flight and no key expansion running.
// Timing: a block accepted at clock edge n is presented at edge n + 114 (115
// register stages: 2 initial add round key, 9 x 12 loop, 3 sub bytes and
// shift rows, 2 final add round key). Up to 12 blocks are in flight; a
// continuous stream leaves 12 blocks every 115 cycles in steady state.
module drab_locus_top
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   key_valid,
  output logic   key_ready,
  input  state_t key,
  input  logic   in_valid,
  output logic   in_ready,
  input  logic   in_mode,
  input  state_t in_block,
  output logic   out_valid,
  output logic   out_mode,
  output state_t out_block,
  output logic   idle
);

  logic ks_start, ks_busy;
  logic ark5_rst, sb_mode, sr_rst, sr_mode, mc_mode, ark4_rst, ark6_rst;
  logic ent_valid, ent_new, rk_mode, fk_mode, ks_mc_mode, pipe_empty;

  assign idle = pipe_empty && !ks_busy;
  logic [3:0] ent_slot, rk_slot;
  state_t ks_sb_in, ks_mc_in, sb_tap, mc_tap, rk, fk, ik;

  aes_controller u_ctrl (
    .clk, .rst_n,
    .key_valid, .key_ready, .ks_start, .ks_busy,
    .in_valid, .in_ready, .in_mode,
    .ark5_rst, .sb_mode, .sr_rst, .sr_mode, .mc_mode, .ark4_rst, .ark6_rst,
    .ent_valid, .ent_new, .ent_slot, .rk_slot, .rk_mode, .fk_mode,
    .out_valid, .out_mode, .pipe_empty
  );

  key_schedule u_ks (
    .clk, .rst_n,
    .start(ks_start), .key_in(key), .busy(ks_busy),
    .ks_sb_in, .sb_out(sb_tap), .ks_mc_in, .ks_mc_mode, .mc_out(mc_tap),
    .ent_valid, .ent_new, .ent_slot, .rk_slot, .rk_mode, .fk_mode,
    .ik_mode(in_mode),
    .rk, .fk, .ik
  );

  aes_datapath u_dp (
    .clk,
    .in_block, .init_key(ik), .ark5_rst,
    .sb_mode, .sr_rst, .sr_mode, .mc_mode, .loop_key(rk), .ark4_rst,
    .final_key(fk), .ark6_rst,
    .ks_sb_in, .ks_mc_in, .ks_mc_mode, .sb_tap, .mc_tap,
    .out_block
  );

endmodule
