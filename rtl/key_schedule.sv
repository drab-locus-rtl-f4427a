// key_schedule: AES-128 key expansion for both directions, round-key storage
// and per-slot round tracking.
//
// Expansion runs once per key, before any block is accepted, because any
// block in the pipeline may be in any round and either mode. It borrows the
// datapath: the S-box of RotWord(w3) is taken by OR-ing the word into the
// sub bytes input and reading the sub bytes output two cycles later (the
// other 12 bytes are zero and their results are ignored); the
// equivalent-inverse-cipher key InvMixColumns(Ki) is taken by OR-ing Ki into
// the mix columns input with the decryption mode and reading the mix columns
// output six cycles later. The controller keeps the rest of the datapath at
// zero meanwhile; outside expansion both taps are driven to zero.
//
// Sequence: LOAD writes K0 to {dec,10}; then for i = 1..10: SubWord request,
// K(i) = expand(K(i-1)) written to {enc,i}; for i <= 9 an InvMixColumns
// request whose result goes to {dec,10-i}. It takes 1 + 10*3 + 9*7 = 94
// cycles after start (busy is high for that time).
//
// Keys for the three add round key instances:
//   initial: combinational from registers, K0 (enc) or K10 (dec); K0 is the
//            dedicated initial-key register, K10 is what the working
//            register holds at the end of expansion.
//   loop:    RAM port A at {mode, cnt[slot]}, one cycle after the request.
//   final:   RAM port B at {mode, 10}, one cycle after the request.
// cnt[] are the 12 round counters, one per pipeline slot: set to 1 when a
// new block enters its slot at the loop entry, incremented on each further
// pass.
//
// Only the top word of the sub bytes output (the SubWord result) is read;
// its other 96 bits carry the S-box of the zero lanes and are left unused.
module key_schedule
  import aes_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // key load
  input  logic       start,
  input  state_t     key_in,
  output logic       busy,
  // datapath taps
  output state_t     ks_sb_in,
  input  state_t     sb_out,
  output state_t     ks_mc_in,
  output logic       ks_mc_mode,
  input  state_t     mc_out,
  // round tracking (from the controller)
  input  logic       ent_valid,
  input  logic       ent_new,
  input  logic [3:0] ent_slot,
  input  logic [3:0] rk_slot,
  input  logic       rk_mode,
  input  logic       fk_mode,
  input  logic       ik_mode,
  // keys to the add round key instances
  output state_t     rk,
  output state_t     fk,
  output state_t     ik
);

  typedef enum logic [2:0] {
    KS_IDLE, KS_LOAD, KS_SB_REQ, KS_SB_WAIT, KS_SB_CAP,
    KS_MC_REQ, KS_MC_WAIT, KS_MC_CAP
  } ks_state_e;

  ks_state_e   state;
  state_t      k0_q;    // initial round key register (K0)
  state_t      w_q;     // working key register, K10 after expansion
  state_t      key_q;   // captured cipher key
  logic [3:0]  rnd_q;
  logic [2:0]  wait_q;
  logic [3:0]  cnt [12];

  assign busy = (state != KS_IDLE);

  // Next round key from the substituted, rotated last word.
  logic [31:0] t_word;
  state_t      nk;
  always_comb begin
    t_word       = sb_out[127:96] ^ {rcon(rnd_q), 24'h0};
    nk[127:96]   = w_q[127:96] ^ t_word;
    nk[95:64]    = w_q[95:64]  ^ nk[127:96];
    nk[63:32]    = w_q[63:32]  ^ nk[95:64];
    nk[31:0]     = w_q[31:0]   ^ nk[63:32];
  end

  assign ks_sb_in   = (state == KS_SB_REQ) ? {w_q[23:0], w_q[31:24], 96'h0} : '0;
  assign ks_mc_in   = (state == KS_MC_REQ) ? w_q : '0;
  assign ks_mc_mode = (state == KS_MC_REQ);

  // Key RAM port A: writes during expansion, round-key reads otherwise.
  logic [4:0] addr_a;
  logic       we_a;
  state_t     wdata_a;
  always_comb begin
    addr_a  = {rk_mode, cnt[rk_slot]};
    we_a    = 1'b0;
    wdata_a = nk;
    unique case (state)
      KS_LOAD:   begin addr_a = {MODE_DEC, 4'd10};        we_a = 1'b1; wdata_a = key_q;  end
      KS_SB_CAP: begin addr_a = {MODE_ENC, rnd_q};        we_a = 1'b1; wdata_a = nk;     end
      KS_MC_CAP: begin addr_a = {MODE_DEC, 4'd10 - rnd_q}; we_a = 1'b1; wdata_a = mc_out; end
      default: ;
    endcase
  end

  key_ram u_ram (
    .clk     (clk),
    .addr_a  (addr_a),
    .we_a    (we_a),
    .wdata_a (wdata_a),
    .rdata_a (rk),
    .addr_b  ({fk_mode, 4'd10}),
    .rdata_b (fk)
  );

  assign ik = ik_mode ? w_q : k0_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= KS_IDLE;
      rnd_q  <= '0;
      wait_q <= '0;
    end else begin
      unique case (state)
        KS_IDLE: if (start) begin
          key_q <= key_in;
          state <= KS_LOAD;
        end
        KS_LOAD: begin
          k0_q  <= key_q;
          w_q   <= key_q;
          rnd_q <= 4'd1;
          state <= KS_SB_REQ;
        end
        KS_SB_REQ:  state <= KS_SB_WAIT;
        KS_SB_WAIT: state <= KS_SB_CAP;
        KS_SB_CAP: begin
          w_q <= nk;
          if (rnd_q == 4'(NUM_ROUNDS)) state <= KS_IDLE;
          else                         state <= KS_MC_REQ;
        end
        KS_MC_REQ: begin
          wait_q <= 3'd4;
          state  <= KS_MC_WAIT;
        end
        KS_MC_WAIT: begin
          wait_q <= wait_q - 3'd1;
          if (wait_q == 3'd0) state <= KS_MC_CAP;
        end
        KS_MC_CAP: begin
          rnd_q <= rnd_q + 4'd1;
          state <= KS_SB_REQ;
        end
        default: state <= KS_IDLE;
      endcase
    end
  end

  // Round counters, one per loop slot.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 12; i++) cnt[i] <= '0;
    end else if (ent_valid) begin
      cnt[ent_slot] <= ent_new ? 4'd1 : cnt[ent_slot] + 4'd1;
    end
  end

endmodule
