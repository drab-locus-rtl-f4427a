// tb_key_schedule: runs key expansion against behavioural stand-ins for the
// datapath taps (sub bytes: 2-cycle S-box of the operand; mix columns:
// 6-cycle MixColumns or InvMixColumns by mode), then checks
//   * busy lasts the documented 94 cycles,
//   * every round key read through the 12 per-slot round counters, for both
//     modes, against the reference expansion (decryption keys are the
//     equivalent-inverse-cipher keys InvMixColumns(K(10-r))),
//   * the final key (port B) and the initial key for both modes,
// for two different keys in a row.
module tb_key_schedule;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy;
  logic [127:0] key_in, ks_sb_in, sb_out, ks_mc_in, mc_out, rk, fk, ik;
  logic ks_mc_mode, ent_valid, ent_new, rk_mode, fk_mode, ik_mode;
  logic [3:0] ent_slot, rk_slot;
  int checks = 0, failures = 0;

  key_schedule dut (.*);

  // Tap models.
  logic [127:0] sb_d1, mc_d [6];
  always @(posedge clk) begin
    logic [127:0] t;
    for (int i = 0; i < 16; i++) t[127-8*i -: 8] = sb(ks_sb_in[127-8*i -: 8]);
    sb_d1 <= t;
    sb_out <= sb_d1;
    mc_d[0] <= ks_mc_mode ? inv_mix(ks_mc_in) : mix(ks_mc_in);
    for (int i = 1; i < 6; i++) mc_d[i] <= mc_d[i-1];
  end
  assign mc_out = mc_d[5];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_key(input logic [127:0] k);
    keys_t e = expand(k);
    int busy_cycles = 0;
    @(negedge clk);
    key_in = k; start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin busy_cycles++; @(negedge clk); end
    checks++;
    if (busy_cycles != 94) begin failures++; $display("FAIL busy %0d cycles", busy_cycles); end
    // Set slot s to round (s % 10) + 1 through the counters.
    for (int s = 0; s < 12; s++) begin
      for (int r = 0; r <= s % 10; r++) begin
        ent_valid = 1; ent_new = (r == 0); ent_slot = 4'(s);
        @(negedge clk);
      end
    end
    ent_valid = 0;
    for (int s = 0; s < 12; s++) begin
      for (int md = 0; md < 2; md++) begin
        automatic int r = s % 10 + 1;
        automatic logic [127:0] x = md ? ((r == 10) ? e[0] : inv_mix(e[10 - r])) : e[r];
        rk_slot = 4'(s); rk_mode = md[0]; fk_mode = md[0]; ik_mode = md[0];
        @(negedge clk);
        checks += 3;
        if (rk !== x) begin failures++; $display("FAIL rk slot %0d mode %0d round %0d", s, md, r); end
        if (fk !== (md ? e[0] : e[10])) begin failures++; $display("FAIL fk mode %0d", md); end
        if (ik !== (md ? e[10] : e[0])) begin failures++; $display("FAIL ik mode %0d", md); end
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; key_in = '0;
    ent_valid = 0; ent_new = 0; ent_slot = 0; rk_slot = 0; rk_mode = 0; fk_mode = 0; ik_mode = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_key(128'h2b7e151628aed2a6abf7158809cf4f3c);
    run_key({$urandom, $urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
