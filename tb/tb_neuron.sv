// tb_neuron: the default 16-input first-layer neuron and a 12-input signed
// neuron of the second-layer shape are fed a new random input set every
// clock; each output is compared two cycles later (the pipeline latency) with
// the weighted sum computed per group of four, with the group sums cut to
// the adder input width as in the neuron diagram.
module tb_neuron;
  logic clk = 1'b0;
  logic        [11:0] a1 [16];
  logic signed [17:0] b1 [16];
  logic        [13:0] a2 [12];
  logic signed [15:0] b2 [12];
  logic signed [31:0] m1, m2;
  int checks = 0, failures = 0;
  longint q1 [$], q2 [$];

  neuron dut1 (.clk, .dataa(a1), .datab(b1), .ma(m1));
  neuron #(.N_IN(12), .A_W(14), .B_W(16), .A_SIGNED(1'b1), .GROUP_W(32), .OUT_W(32))
    dut2 (.clk, .dataa(a2), .datab(b2), .ma(m2));

  always #5 clk = ~clk;

  function automatic longint wrap(longint v, int w);
    longint m = (longint'(1) << w) - 1;
    v = v & m;
    if (v >= (longint'(1) << (w - 1))) v -= (longint'(1) << w);
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint g, e1, e2;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        a1[i] = 12'($urandom);
        b1[i] = (n % 3 == 0) ? 18'($urandom) : 18'(int'($urandom_range(0, 4096)) - 2048);
      end
      for (int i = 0; i < 12; i++) begin
        a2[i] = 14'($urandom);
        b2[i] = 16'($urandom);
      end
      e1 = 0;
      for (int gi = 0; gi < 4; gi++) begin
        g = 0;
        for (int i = 0; i < 4; i++) g += longint'(a1[4*gi+i]) * longint'(b1[4*gi+i]);
        e1 += wrap(g, 30);
      end
      e2 = 0;
      for (int gi = 0; gi < 3; gi++) begin
        g = 0;
        for (int i = 0; i < 4; i++) g += longint'(signed'(a2[4*gi+i])) * longint'(b2[4*gi+i]);
        e2 += wrap(g, 32);
      end
      q1.push_back(wrap(e1, 32));
      q2.push_back(wrap(e2, 32));
      @(posedge clk); #1;
      if (n >= 1) begin
        checks += 2;
        if (longint'(m1) != q1[0]) begin failures++; if (failures < 10) $display("n16: got %0d want %0d", m1, q1[0]); end
        if (longint'(m2) != q2[0]) begin failures++; if (failures < 10) $display("n12: got %0d want %0d", m2, q2[0]); end
        void'(q1.pop_front());
        void'(q2.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
