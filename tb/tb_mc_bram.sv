// tb_mc_bram: reads all 512 entries through both ports and checks the
// product words, {x*02,x*01,x*01,x*03} and {x*0E,x*09,x*0D,x*0B}, two cycles
// after each address.
module tb_mc_bram;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [8:0]  addr_a, addr_b;
  logic [31:0] dout_a, dout_b;
  int checks = 0, failures = 0;

  mc_bram dut (.*);

  function automatic logic [31:0] ref_of(logic [8:0] a);
    u8 x = a[7:0];
    return a[8] ? {mul(x, 8'h0e), mul(x, 8'h09), mul(x, 8'h0d), mul(x, 8'h0b)}
                : {mul(x, 8'h02), x, x, mul(x, 8'h03)};
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0] ha [$];
    logic [8:0] hb [$];
    for (int i = 0; i < 512 + 2; i++) begin
      addr_a = 9'(i);
      addr_b = 9'((i * 7 + 3) % 512);
      @(posedge clk);
      ha.push_back(addr_a);
      hb.push_back(addr_b);
      #1;
      if (ha.size() == 2) begin
        automatic logic [8:0] ea = ha.pop_front();
        automatic logic [8:0] eb = hb.pop_front();
        checks += 2;
        if (dout_a !== ref_of(ea)) begin failures++; $display("FAIL a[%0d] = %h", ea, dout_a); end
        if (dout_b !== ref_of(eb)) begin failures++; $display("FAIL b[%0d] = %h", eb, dout_b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
