// tb_mix_columns: the FIPS-197 MixColumns example, then 300 random states
// with random modes, one per cycle, each checked exactly six cycles later
// against the reference MixColumns / InvMixColumns.
module tb_mix_columns;
  import aes_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         mode;
  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  mix_columns dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] hd [$];
    logic hm [$];
    for (int i = 0; i < 306; i++) begin
      if (i == 0) begin
        din = 128'hd4bf5d30e0b452aeb84111f11e2798e5; mode = 0;
      end else begin
        din  = {$urandom, $urandom, $urandom, $urandom};
        mode = 1'($urandom);
      end
      @(posedge clk);
      hd.push_back(din); hm.push_back(mode);
      #1;
      if (hd.size() == 6) begin
        automatic logic m = hm.pop_front();
        automatic logic [127:0] s = hd.pop_front();
        automatic logic [127:0] e = m ? inv_mix(s) : mix(s);
        checks++;
        if (i == 5 && e !== 128'h046681e5e0cb199a48f8d37a2806264c) begin
          failures++; $display("FAIL reference model");
        end
        if (dout !== e) begin failures++; $display("FAIL %h exp %h", dout, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
