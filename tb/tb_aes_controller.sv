// tb_aes_controller: the controller with a behavioural key schedule (busy for
// 94 cycles after start). Checks
//   * flush: no key accepted during the first 113 cycles after reset;
//   * key expansion: shift rows and all add round key instances held in reset;
//   * a lone block: initial add round key released once, loop add round key
//     released 9 times, final add round key once, out_valid 115 cycles after
//     the block was presented, out_mode equal to its mode;
//   * a stream of 24 back-to-back blocks: the first 12 fill the 12 slots,
//     the 13th stalls until the slot of the 1st comes round again at the
//     loop entry (120 cycles later), outputs in order with their modes;
//   * the loop entry never merges a new block with a live one (assertion in
//     the controller plus a check here).
module tb_aes_controller;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, key_valid, key_ready, ks_start, ks_busy, in_valid, in_ready, in_mode;
  logic ark5_rst, sb_mode, sr_rst, sr_mode, mc_mode, ark4_rst, ark6_rst;
  logic ent_valid, ent_new, rk_mode, fk_mode, out_valid, out_mode, pipe_empty;
  logic [3:0] ent_slot, rk_slot;
  int checks = 0, failures = 0;

  aes_controller dut (.*);

  // Behavioural key schedule: busy for 94 cycles.
  int busy_cnt = 0;
  always @(posedge clk) begin
    if (ks_start) busy_cnt <= 94;
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign ks_busy = (busy_cnt > 0);

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint t_in [$];
  logic   m_in [$];
  int n_ark5 = 0, n_ark4 = 0, n_ark6 = 0, n_stall = 0, n_out = 0;
  longint first_accept = -1, accept13 = -1;
  int n_acc = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (!ark5_rst) n_ark5++;
      if (!ark4_rst) n_ark4++;
      if (!ark6_rst) n_ark6++;
      if (ks_busy) begin
        checks++;
        if (!sr_rst || !ark4_rst || !ark5_rst || !ark6_rst || in_ready) begin
          failures++; $display("FAIL datapath not held during key expansion");
        end
      end
      if (ent_new && dut.occ_q[12]) begin failures++; $display("FAIL collision"); end
      if (in_valid && !in_ready && !ks_busy) n_stall++;
      if (in_valid && in_ready) begin
        t_in.push_back(cyc); m_in.push_back(in_mode);
        n_acc++;
        if (n_acc == 13) accept13 = cyc;
        if (n_acc == 1)  first_accept = cyc;
      end
      if (out_valid) begin
        checks += 2;
        n_out++;
        if (t_in.size() == 0) begin failures++; $display("FAIL spurious out_valid"); end
        else begin
          automatic longint t = t_in.pop_front();
          automatic logic   m = m_in.pop_front();
          if (cyc - t != 115) begin failures++; $display("FAIL latency %0d", cyc - t); end
          if (out_mode !== m) begin failures++; $display("FAIL out_mode"); end
        end
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wait_cycles = 0;
    rst_n = 0; key_valid = 0; in_valid = 0; in_mode = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    key_valid = 1;
    while (!key_ready) begin wait_cycles++; @(negedge clk); end
    checks++;
    if (wait_cycles < 113) begin failures++; $display("FAIL key taken during flush (%0d)", wait_cycles); end
    @(negedge clk);
    key_valid = 0;
    while (!pipe_empty || ks_busy || !in_ready) @(negedge clk);

    // A lone block.
    n_ark5 = 0; n_ark4 = 0; n_ark6 = 0;
    in_valid = 1; in_mode = 1;
    @(negedge clk);
    in_valid = 0;
    repeat (130) @(negedge clk);
    checks += 4;
    if (n_ark5 != 1) begin failures++; $display("FAIL initial ARK released %0d times", n_ark5); end
    if (n_ark4 != 9) begin failures++; $display("FAIL loop ARK released %0d times", n_ark4); end
    if (n_ark6 != 1) begin failures++; $display("FAIL final ARK released %0d times", n_ark6); end
    if (n_out != 1)  begin failures++; $display("FAIL %0d outputs", n_out); end

    // 24 blocks back to back.
    n_acc = 0;
    for (int i = 0; i < 24; i++) begin
      in_valid = 1; in_mode = 1'($urandom);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    while (!pipe_empty) @(negedge clk);
    checks += 3;
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (accept13 - first_accept != 120) begin
      failures++; $display("FAIL 13th block taken %0d cycles after the 1st", accept13 - first_accept);
    end
    if (n_out != 25) begin failures++; $display("FAIL %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
