// aes_controller: block tracking, mode distribution, input stalls and the
// datapath resets of the DRAB-LOCUS core.
//
// The round loop is 12 register stages long and is divided into 12 time
// slots; a free-running phase counter (0..11) names the slot at the loop
// entry, so the slot in loop stage k is (phase - k) mod 12.
//
// State held:
//   occ_q[1..12]  occupancy shift register: stage k holds a live block
//   mode_q[1..12] mode shift register: the mode of the block in stage k.
//                 A free slot enters with mode 0, and the mode sent to mix
//                 columns is masked by occupancy, so the key schedule, which
//                 ORs its own mode in, always finds mode 0 there.
//   trk[0..11]    twelve 113-bit completion shift registers, one per slot.
//                 A 1 enters when a block is accepted and leaves 113 edges
//                 later, exactly when that block's last shift rows result
//                 sits in stage 3. Only their last bits are read (they map to
//                 LUT shift registers on the FPGA) and they have no reset, so
//                 the FLUSH state shifts zeros through them after reset.
//
// Rules it applies:
//   * A block may be accepted only if the slot it will take at the loop
//     entry, two cycles later, is free: in_ready = RUN & !occ_q[10] and no
//     key load pending.
//   * The initial add round key output is held in reset unless it is
//     producing an accepted block; the loop add round key output is held in
//     reset unless its slot carries a live block, so the OR at the loop entry
//     sees only the new block.
//   * When a block completes, its occupancy bit is cleared as it leaves stage
//     3, and the final add round key is released for exactly that cycle.
//   * Outside RUN (flush and key expansion) every add round key instance and
//     shift rows are held in reset, so the key schedule has the sub bytes and
//     mix columns units to itself.
// A new key is taken in IDLE, or in RUN once the pipeline is empty; a
// pending key blocks new inputs so the pipeline drains.
//
// The three shift-register kinds and their lengths (12 x 113, 12, 12), the
// stall and reset rules and the FLUSH state follow the paper; the slot
// numbering by a phase counter, the rekey policy and the exact state
// encoding are this design's.
module aes_controller
  import aes_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // key load
  input  logic       key_valid,
  output logic       key_ready,
  output logic       ks_start,
  input  logic       ks_busy,
  // block input
  input  logic       in_valid,
  output logic       in_ready,
  input  logic       in_mode,
  // datapath control
  output logic       ark5_rst,
  output logic       sb_mode,
  output logic       sr_rst,
  output logic       sr_mode,
  output logic       mc_mode,
  output logic       ark4_rst,
  output logic       ark6_rst,
  // key schedule control
  output logic       ent_valid,
  output logic       ent_new,
  output logic [3:0] ent_slot,
  output logic [3:0] rk_slot,
  output logic       rk_mode,
  output logic       fk_mode,
  // block output
  output logic       out_valid,
  output logic       out_mode,
  output logic       pipe_empty
);

  typedef enum logic [1:0] {C_FLUSH, C_IDLE, C_KEYINIT, C_RUN} ctrl_state_e;

  ctrl_state_e state;
  logic [7:0]  flush_cnt;
  logic [3:0]  phase;
  logic [12:1] occ_q, mode_q;
  logic        v5_1, v5_2, m5_1, m5_2;
  logic        fin, fin_d1, fin_d2, om_d1, om_d2;
  logic [TRACK_LEN-1:0] trk [12];

  logic in_fire;
  logic run;
  logic mode_x0;

  assign run        = (state == C_RUN);
  assign pipe_empty = (occ_q == '0) && !v5_1 && !v5_2 && !fin_d1 && !fin_d2;
  assign key_ready  = (state == C_IDLE) || (run && pipe_empty);
  assign ks_start   = key_valid && key_ready;
  assign in_ready   = run && !occ_q[10] && !key_valid;
  assign in_fire    = in_valid && in_ready;

  // Loop entry (the OR gate in front of sub bytes).
  assign ent_new   = v5_2;
  assign ent_valid = v5_2 || occ_q[12];
  assign ent_slot  = phase;
  assign mode_x0   = v5_2 ? m5_2 : (mode_q[12] && occ_q[12]);

  // Slot of loop stage 8, whose round key is read now for stage 10.
  assign rk_slot = (phase >= 4'd8) ? phase - 4'd8 : phase + 4'd4;
  assign rk_mode = mode_q[8];
  assign fk_mode = mode_q[2];
  assign sb_mode = mode_x0;
  assign sr_mode = mode_q[2];
  assign mc_mode = mode_q[3] && occ_q[3];

  assign ark5_rst = !run || !v5_1;
  assign ark4_rst = !run || !occ_q[11];
  assign ark6_rst = !run || !fin_d1;
  assign sr_rst   = !run;

  assign out_valid = fin_d2;
  assign out_mode  = om_d2;

  // Completion tracking.
  logic [3:0] trk_sel;
  assign trk_sel = (phase >= 4'd10) ? phase - 4'd10 : phase + 4'd2;

  always_comb begin
    fin = 1'b0;
    for (int i = 0; i < 12; i++) fin = fin | trk[i][TRACK_LEN-1];
  end

  for (genvar i = 0; i < 12; i++) begin : g_trk
    always_ff @(posedge clk)
      trk[i] <= {trk[i][TRACK_LEN-2:0], in_fire && (trk_sel == 4'(i))};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= C_FLUSH;
      flush_cnt <= '0;
      phase     <= '0;
      occ_q     <= '0;
      mode_q    <= '0;
      v5_1      <= 1'b0;
      v5_2      <= 1'b0;
      m5_1      <= 1'b0;
      m5_2      <= 1'b0;
      fin_d1    <= 1'b0;
      fin_d2    <= 1'b0;
      om_d1     <= 1'b0;
      om_d2     <= 1'b0;
    end else begin
      phase <= (phase == 4'd11) ? '0 : phase + 4'd1;

      unique case (state)
        C_FLUSH: begin
          flush_cnt <= flush_cnt + 8'd1;
          if (flush_cnt == 8'(TRACK_LEN - 1)) state <= C_IDLE;
        end
        C_IDLE:    if (ks_start) state <= C_KEYINIT;
        C_KEYINIT: if (!ks_busy) state <= C_RUN;
        C_RUN:     if (ks_start) state <= C_KEYINIT;
        default:   state <= C_FLUSH;
      endcase

      v5_1 <= in_fire;
      m5_1 <= in_mode;
      v5_2 <= v5_1;
      m5_2 <= m5_1;

      occ_q  <= {occ_q[11:4], occ_q[3] && !fin, occ_q[2:1], ent_valid};
      mode_q <= {mode_q[11:1], mode_x0};

      fin_d1 <= fin && run;
      fin_d2 <= fin_d1;
      om_d1  <= mode_q[3];
      om_d2  <= om_d1;
    end
  end

  // A new block must never meet a live block at the loop entry.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(v5_2 && occ_q[12]));
  // The completion marker must always find a live block in stage 3.
  a_fin_live: assert property (@(posedge clk) disable iff (!rst_n)
    (fin && run) |-> occ_q[3]);

endmodule
