// tb_sub_bytes: 300 random states with random modes, one per cycle; each
// result is checked two cycles later against the byte-wise reference S-box
// or inverse S-box.
module tb_sub_bytes;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         mode;
  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  sub_bytes dut (.*);

  function automatic logic [127:0] ref_of(logic m, logic [127:0] s);
    logic [127:0] t;
    for (int i = 0; i < 16; i++) t[127-8*i -: 8] = m ? isb(s[127-8*i -: 8]) : sb(s[127-8*i -: 8]);
    return t;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] hd [$];
    logic hm [$];
    for (int i = 0; i < 302; i++) begin
      din  = {$urandom, $urandom, $urandom, $urandom};
      mode = 1'($urandom);
      @(posedge clk);
      hd.push_back(din); hm.push_back(mode);
      #1;
      if (hd.size() == 2) begin
        automatic logic [127:0] e = ref_of(hm.pop_front(), hd.pop_front());
        checks++;
        if (dout !== e) begin failures++; $display("FAIL %h exp %h", dout, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
