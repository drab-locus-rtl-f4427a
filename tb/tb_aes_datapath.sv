// tb_aes_datapath: drives the datapath with a hand-written schedule, playing
// the controller and key schedule, for several blocks in different loop
// slots and modes at once.
//
// Block j is taken by the initial add round key at edge d_j. Relative to
// that edge (n = edge - d_j) the schedule is: loop entry (sub bytes address
// and mode) at n = 2 + 12(r-1); shift rows mode at n = 4 + 12(r-1); mix
// columns mode at n = 5 + 12(r-1); round key r captured at n = 11 + 12(r-1);
// loop add round key released at n = 13 + 12(r-1), r = 1..9; final key at
// n = 113; final add round key released at n = 114; result visible after
// edge 114. Each result is compared with the reference model.
module tb_aes_datapath;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [127:0] in_block, init_key, loop_key, final_key, ks_sb_in, ks_mc_in;
  logic [127:0] sb_tap, mc_tap, out_block;
  logic ark5_rst, sb_mode, sr_rst, sr_mode, mc_mode, ark4_rst, ark6_rst, ks_mc_mode;
  int checks = 0, failures = 0;

  aes_datapath dut (.*);

  localparam int NB = 4;
  int           d  [NB] = '{0, 5, 6, 11};
  logic         m  [NB] = '{0, 1, 0, 1};
  logic [127:0] pt [NB];
  logic [127:0] key;
  keys_t        ks;

  function automatic logic [127:0] rkey(logic md, int r);
    if (!md) return ks[r];
    if (r == 0) return ks[10];
    if (r == 10) return ks[0];
    return inv_mix(ks[10 - r]);
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key = {$urandom, $urandom, $urandom, $urandom};
    ks  = expand(key);
    for (int j = 0; j < NB; j++) pt[j] = {$urandom, $urandom, $urandom, $urandom};
    ks_sb_in = '0; ks_mc_in = '0; ks_mc_mode = 0; sr_rst = 0;
    // Clear the loop add round key and the final one before starting.
    ark4_rst = 1; ark5_rst = 1; ark6_rst = 1;
    in_block = '0; init_key = '0; loop_key = '0; final_key = '0;
    sb_mode = 0; sr_mode = 0; mc_mode = 0;
    repeat (16) @(negedge clk);
    for (int n = 0; n < 140; n++) begin
      // Set up the values the coming edge n samples.
      ark5_rst = 1; ark4_rst = 1; ark6_rst = 1;
      sb_mode = 0; sr_mode = 0; mc_mode = 0;
      in_block = '0; init_key = '0;
      for (int j = 0; j < NB; j++) begin
        automatic int t = n - d[j];
        if (t == 0) begin in_block = pt[j]; init_key = rkey(m[j], 0); end
        if (t == 1) ark5_rst = 0;
        if (t >= 2 && t <= 110 && (t - 2) % 12 == 0) sb_mode = m[j];
        if (t >= 4 && t <= 112 && (t - 4) % 12 == 0) sr_mode = m[j];
        if (t >= 5 && t <= 101 && (t - 5) % 12 == 0) mc_mode = m[j];
        if (t >= 11 && t <= 107 && (t - 11) % 12 == 0) loop_key = rkey(m[j], (t - 11) / 12 + 1);
        if (t >= 13 && t <= 109 && (t - 13) % 12 == 0) ark4_rst = 0;
        if (t == 113) final_key = rkey(m[j], 10);
        if (t == 114) ark6_rst = 0;
      end
      @(posedge clk);
      #1;
      for (int j = 0; j < NB; j++) begin
        if (n - d[j] == 114) begin
          automatic logic [127:0] e = m[j] ? decrypt(key, pt[j]) : encrypt(key, pt[j]);
          checks++;
          if (out_block !== e) begin
            failures++;
            $display("FAIL block %0d: %h expected %h", j, out_block, e);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
