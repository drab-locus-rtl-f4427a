// tb_shift_rows: random states and modes, checked one cycle later against
// a reference ShiftRows / InvShiftRows written on the byte index; also
// checks that rst clears the register.
module tb_shift_rows;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         rst, mode;
  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  shift_rows dut (.*);

  // byte i of the state is s(i%4, i/4); ShiftRows takes out(r,c) from
  // in(r, c+r); InvShiftRows puts in(r,c) at out(r, c+r).
  function automatic logic [127:0] ref_of(logic m, logic [127:0] s);
    logic [127:0] t;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        if (!m) t[127-8*(4*c+r) -: 8] = s[127-8*(4*((c+r)%4)+r) -: 8];
        else    t[127-8*(4*((c+r)%4)+r) -: 8] = s[127-8*(4*c+r) -: 8];
    return t;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 0;
    // FIPS-197 round 1 example: after SubBytes -> after ShiftRows
    din = 128'hd42711aee0bf98f1b8b45de51e415230; mode = 0;
    @(posedge clk); #1;
    checks++;
    if (dout !== 128'hd4bf5d30e0b452aeb84111f11e2798e5) begin failures++; $display("FAIL FIPS %h", dout); end
    for (int i = 0; i < 200; i++) begin
      logic [127:0] e;
      din = {$urandom, $urandom, $urandom, $urandom};
      mode = 1'($urandom);
      e = ref_of(mode, din);
      @(posedge clk); #1;
      checks++;
      if (dout !== e) begin failures++; $display("FAIL %h exp %h", dout, e); end
    end
    rst = 1;
    @(posedge clk); #1;
    checks++;
    if (dout !== '0) begin failures++; $display("FAIL reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
