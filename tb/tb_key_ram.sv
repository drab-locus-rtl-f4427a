// tb_key_ram: writes 32 random keys through port A, then reads them back
// through both ports with random addresses and checks the one-cycle read
// latency.
module tb_key_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0]   addr_a, addr_b;
  logic         we_a;
  logic [127:0] wdata_a, rdata_a, rdata_b;
  logic [127:0] model [32];
  int checks = 0, failures = 0;

  key_ram dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_b = 0;
    for (int i = 0; i < 32; i++) begin
      addr_a = 5'(i); we_a = 1; wdata_a = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata_a;
      @(posedge clk); #1;
    end
    we_a = 0;
    for (int i = 0; i < 100; i++) begin
      addr_a = 5'($urandom); addr_b = 5'($urandom);
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a !== model[addr_a]) begin failures++; $display("FAIL a %0d", addr_a); end
      if (rdata_b !== model[addr_b]) begin failures++; $display("FAIL b %0d", addr_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
