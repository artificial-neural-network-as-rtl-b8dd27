// tb_par_add: random 32-bit partial sums, some beyond the 30-bit input range,
// go to the default 4 x 30-bit adder and to a 3-input 32-bit one; the sums
// (low 30 bits of each input, sign-extended) are checked one cycle later.
module tb_par_add;
  logic clk = 1'b0;
  logic signed [31:0] d4 [4];
  logic signed [31:0] d3 [3];
  logic signed [31:0] r4, r3;
  int checks = 0, failures = 0;

  par_add #(.N(4), .IN_W(30), .OUT_W(32)) dut4 (.clk, .data(d4), .result(r4));
  par_add #(.N(3), .IN_W(32), .OUT_W(32)) dut3 (.clk, .data(d3), .result(r3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e4, e3, v;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      e4 = 0; e3 = 0;
      for (int i = 0; i < 4; i++) begin
        d4[i] = (n % 2 == 0) ? 32'($urandom) : 32'(int'($urandom_range(0, 1 << 28)) - (1 << 27));
        v = longint'(d4[i]) & 64'h3fff_ffff;
        if (v >= (1 << 29)) v -= (1 << 30);
        e4 += v;
      end
      for (int i = 0; i < 3; i++) begin
        d3[i] = 32'(int'($urandom_range(0, 1 << 30)) - (1 << 29));
        e3 += longint'(d3[i]);
      end
      e4 = longint'(32'(e4)); // 32-bit result
      e3 = longint'(32'(e3));
      @(posedge clk); #1;
      checks += 2;
      if (longint'(r4) != e4) begin failures++; $display("4x30: got %0d want %0d", r4, e4); end
      if (longint'(r3) != e3) begin failures++; $display("3x32: got %0d want %0d", r3, e3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
