// tb_mult_add4: drives the 12x18 unsigned-data multiply-adder and a signed
// 14x16 one with random operands (including the extreme codes) and compares
// each result, one cycle later, with the sum of products in 64-bit integers.
module tb_mult_add4;
  logic clk = 1'b0;
  logic        [11:0] a_u [4];
  logic signed [17:0] b_u [4];
  logic        [13:0] a_s [4];
  logic signed [15:0] b_s [4];
  logic signed [31:0] r_u, r_s;
  int checks = 0, failures = 0;

  mult_add4 #(.A_W(12), .B_W(18), .A_SIGNED(1'b0), .RES_W(32)) dut_u (.clk, .dataa(a_u), .datab(b_u), .result(r_u));
  mult_add4 #(.A_W(14), .B_W(16), .A_SIGNED(1'b1), .RES_W(32)) dut_s (.clk, .dataa(a_s), .datab(b_s), .result(r_s));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint eu, es;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      eu = 0; es = 0;
      for (int i = 0; i < 4; i++) begin
        a_u[i] = (n % 7 == 0) ? 12'hfff : 12'($urandom);
        b_u[i] = (n % 11 == 0) ? -18'sd131072 : 18'($urandom);
        a_s[i] = (n % 5 == 0) ? 14'h2000 : 14'($urandom);
        b_s[i] = 16'($urandom);
        eu += longint'(a_u[i]) * longint'(b_u[i]);
        es += longint'(signed'(a_s[i])) * longint'(b_s[i]);
      end
      @(posedge clk); #1;
      checks += 2;
      if (longint'(r_u) != eu) begin failures++; $display("unsigned: got %0d want %0d", r_u, eu); end
      if (longint'(r_s) != es) begin failures++; $display("signed: got %0d want %0d", r_s, es); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
