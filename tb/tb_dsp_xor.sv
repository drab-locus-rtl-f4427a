// tb_dsp_xor: two slices in cascade, as in the mix columns tree:
// slice 1 (AREG=BREG=1) computes a^b, slice 2 (AREG=2, BREG=0) adds c
// through its cascade input. Checks P1 two cycles and P2 three cycles after
// the operands, and that rst_p clears P.
module tb_dsp_xor;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        rst1, rst2;
  logic [47:0] a, b, c, p1, p2;
  int checks = 0, failures = 0;

  dsp_xor #(.WIDTH(48), .AREG(1), .BREG(1)) u1 (
    .clk, .rst_p(rst1), .a(a), .b(b), .pcin('0), .p(p1));
  dsp_xor #(.WIDTH(48), .AREG(2), .BREG(0)) u2 (
    .clk, .rst_p(rst2), .a(c), .b('0), .pcin(p1), .p(p2));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] ha [$];
    logic [47:0] hb [$];
    logic [47:0] hc [$];
    rst1 = 0; rst2 = 0;
    for (int i = 0; i < 200; i++) begin
      a = {$urandom, 16'($urandom)}; b = {$urandom, 16'($urandom)}; c = {$urandom, 16'($urandom)};
      @(posedge clk);
      ha.push_back(a); hb.push_back(b); hc.push_back(c);
      #1;
      if (ha.size() >= 2) begin
        checks++;
        if (p1 !== (ha[ha.size()-2] ^ hb[hb.size()-2])) begin failures++; $display("FAIL p1"); end
      end
      if (ha.size() == 3) begin
        automatic logic [47:0] e = ha.pop_front() ^ hb.pop_front() ^ hc.pop_front();
        checks++;
        if (p2 !== e) begin failures++; $display("FAIL p2 %h exp %h", p2, e); end
      end
    end
    rst1 = 1; rst2 = 1;
    @(posedge clk); #1;
    checks++;
    if (p1 !== '0 || p2 !== '0) begin failures++; $display("FAIL reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
