// tb_drab_locus_top: end-to-end test of the DRAB-LOCUS core at its default
// (and only) configuration.
//
// Phases:
//   1. FIPS-197 appendix C.1 known answer: one encryption, then the
//      decryption of its result; the latency of each is checked against the
//      115-cycle figure (block presented in cycle c, out_valid in c+115).
//   2. A saturating stream of blocks with random modes, checked against an
//      independent reference model; it fills all 12 slots (stalls happen),
//      switches modes between neighbouring blocks and measures throughput
//      (a slot is reused 120 cycles after its last block entered, so 12
//      blocks per 120 cycles in steady state).
//   3. A key change after the pipeline drains, then a random-valid stream
//      with the new key.
// Every mechanism (stall, full pipeline, mode switch, rekey, both modes) is
// counted, and one that never happened counts as a failure.
module tb_drab_locus_top;
  import aes_ref_pkg::*;

  logic         clk = 0;
  logic         rst_n;
  logic         key_valid, key_ready;
  logic [127:0] key;
  logic         in_valid, in_ready, in_mode;
  logic [127:0] in_block;
  logic         out_valid, out_mode;
  logic [127:0] out_block;
  logic         idle;

  drab_locus_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Expected-output queue, in acceptance order.
  typedef struct { logic [127:0] data; logic mode; longint t_in; } exp_t;
  exp_t q[$];
  logic [127:0] cur_key;

  int n_out = 0, n_stall = 0, n_switch = 0, n_enc = 0, n_dec = 0, n_rekey = 0;
  int max_inflight = 0, inflight = 0, lat_fail = 0;
  logic last_mode = 0;
  bit   have_last = 0;
  bit   check_latency = 1;

  // Observe on the rising edge (values before the edge); inputs are driven
  // on the falling edge. Accepted at edge n, expected out_valid seen at edge
  // n + 115, i.e. in the 115th cycle after the one that presented it.
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid) begin
        exp_t e;
        checks++;
        if (q.size() == 0) begin
          failures++;
          $display("FAIL: unexpected output %h at cycle %0d", out_block, cyc);
        end else begin
          e = q.pop_front();
          if (out_block !== e.data || out_mode !== e.mode) begin
            failures++;
            $display("FAIL: out %h mode %0d, expected %h mode %0d", out_block, out_mode, e.data, e.mode);
          end
          if (check_latency) begin
            checks++;
            if (cyc - e.t_in != 115) begin
              failures++;
              $display("FAIL: latency %0d cycles, expected 115", cyc - e.t_in);
            end
          end
        end
        n_out++;
        inflight--;
      end
      if (in_valid && in_ready) begin
        exp_t e;
        e.mode = in_mode;
        e.t_in = cyc;
        e.data = in_mode ? decrypt(cur_key, in_block) : encrypt(cur_key, in_block);
        q.push_back(e);
        if (have_last && in_mode != last_mode) n_switch++;
        last_mode = in_mode;
        have_last = 1;
        if (in_mode) n_dec++; else n_enc++;
        inflight++;
        if (inflight > max_inflight) max_inflight = inflight;
      end else if (in_valid && !in_ready && dut.u_ctrl.state == dut.u_ctrl.C_RUN) begin
        n_stall++;
      end
    end
  end

  task automatic load_key(input logic [127:0] k);
    @(negedge clk);
    key_valid = 1;
    key = k;
    while (!key_ready) @(negedge clk);
    cur_key = k;
    @(negedge clk);
    key_valid = 0;
    while (!idle) @(negedge clk);
  endtask

  // Present one block at the falling edge and hold it until taken.
  task automatic send(input logic m, input logic [127:0] b);
    in_valid = 1; in_mode = m; in_block = b;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // Watchdog.
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] ct;
    automatic longint t0 = 0, t1 = 0;
    int outs0;
    rst_n = 0; key_valid = 0; key = '0; in_valid = 0; in_mode = 0; in_block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Phase 1: known answer.
    load_key(128'h000102030405060708090a0b0c0d0e0f);
    send(0, 128'h00112233445566778899aabbccddeeff);
    while (!out_valid) @(negedge clk);
    checks++;
    if (out_block !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++;
      $display("FAIL: FIPS-197 C.1 encryption gave %h", out_block);
    end
    ct = out_block;
    @(negedge clk);
    send(1, ct);
    while (!out_valid) @(negedge clk);
    checks++;
    if (out_block !== 128'h00112233445566778899aabbccddeeff) begin
      failures++;
      $display("FAIL: FIPS-197 C.1 decryption gave %h", out_block);
    end
    @(negedge clk);

    // Phase 2: saturating stream with random modes. A slot is free again
    // 120 cycles after its previous block entered the loop, so in steady
    // state 72 blocks are accepted in exactly 6 x 120 = 720 cycles and the
    // same number leave in that time (the nominal 12 per 115 is not reached).
    outs0 = n_out;
    for (int i = 0; i < 120; i++) begin
      if (i == 24) begin t0 = cyc; outs0 = n_out; end
      if (i == 96) begin
        t1 = cyc;
        checks++;
        $display("phase 2: 72 blocks in %0d cycles, %0d blocks out", t1 - t0, n_out - outs0);
        if (t1 - t0 != 6 * 120 || n_out - outs0 != 72) begin
          failures++;
          $display("FAIL: steady-state rate is not 12 blocks / 120 cycles");
        end
      end
      send(1'($urandom_range(0, 1)), rnd128());
    end
    while (!idle) @(negedge clk);

    // Phase 3: new key, random gaps.
    n_rekey++;
    check_latency = 1;
    load_key(rnd128());
    for (int i = 0; i < 40; i++) begin
      if ($urandom_range(0, 3) == 0) @(negedge clk);
      else send(1'($urandom_range(0, 1)), rnd128());
    end
    while (!idle) @(negedge clk);

    checks += 6;
    if (n_stall == 0)        begin failures++; $display("FAIL: no input stall happened"); end
    if (max_inflight < 12)   begin failures++; $display("FAIL: pipeline never held 12 blocks (%0d)", max_inflight); end
    if (n_switch == 0)       begin failures++; $display("FAIL: no mode switch happened"); end
    if (n_rekey == 0)        begin failures++; $display("FAIL: no rekey happened"); end
    if (n_enc == 0 || n_dec == 0) begin failures++; $display("FAIL: a mode was never used"); end
    if (q.size() != 0)       begin failures++; $display("FAIL: %0d blocks never came out", q.size()); end
    $display("stalls=%0d mode_switches=%0d rekeys=%0d enc=%0d dec=%0d max_inflight=%0d outputs=%0d",
             n_stall, n_switch, n_rekey, n_enc, n_dec, max_inflight, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
