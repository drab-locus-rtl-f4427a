// tb_sbox_bram: reads all 512 entries through both ports, one address per
// cycle, and checks each result two cycles later against the reference
// S-box (addresses 0..255) and inverse S-box (256..511).
module tb_sbox_bram;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [8:0] addr_a, addr_b;
  logic [7:0] dout_a, dout_b;
  int checks = 0, failures = 0;

  sbox_bram dut (.*);

  function automatic logic [7:0] ref_of(logic [8:0] a);
    return a[8] ? isb(a[7:0]) : sb(a[7:0]);
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
      addr_b = 9'(511 - i);
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
