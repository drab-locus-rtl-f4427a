// tb_add_round_key: a loop instance (IN_REGS=2, 3-cycle latency) and an
// initial/final instance (IN_REGS=1, 2-cycle latency) fed the same random
// states and keys; checks state^key at the right cycle and the output reset.
module tb_add_round_key;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         rst2, rst1;
  logic [127:0] st, k, o2, o1;
  int checks = 0, failures = 0;

  add_round_key #(.IN_REGS(2)) u2 (.clk, .rst(rst2), .state(st), .key(k), .dout(o2));
  add_round_key #(.IN_REGS(1)) u1 (.clk, .rst(rst1), .state(st), .key(k), .dout(o1));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] h [$];
    rst1 = 0; rst2 = 0;
    for (int i = 0; i < 200; i++) begin
      st = {$urandom, $urandom, $urandom, $urandom};
      k  = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      h.push_back(st ^ k);
      #1;
      if (h.size() >= 2) begin
        checks++;
        if (o1 !== h[h.size()-2]) begin failures++; $display("FAIL 1-reg %h", o1); end
      end
      if (h.size() == 3) begin
        automatic logic [127:0] e = h.pop_front();
        checks++;
        if (o2 !== e) begin failures++; $display("FAIL 2-reg %h exp %h", o2, e); end
      end
    end
    rst1 = 1; rst2 = 1;
    @(posedge clk); #1;
    checks++;
    if (o1 !== '0 || o2 !== '0) begin failures++; $display("FAIL reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
