// tb_tansig_ram3port: reads every one of the 16384 words through port A and
// (in reverse order) through port B, one address per clock, and compares
// each with round(8192 * tanh((i - 8192) / 1536)) clipped to -8192..8191,
// two cycles after the address (the read latency). Then writes a few words
// through the write port and reads them back on both ports.
module tb_tansig_ram3port;
  localparam int AW = 14, DW = 14, SF = 1536, N = 1 << AW;
  logic clk = 1'b0, wren = 1'b0;
  logic signed [DW-1:0] data = '0, qa, qb;
  logic [AW-1:0] wraddress = '0, ra = '0, rb = '0;
  int checks = 0, failures = 0;
  int qea [$], qeb [$];

  tansig_ram3port #(.AW(AW), .DW(DW), .SF(SF)) dut (
    .clk, .wren, .data, .wraddress, .rdaddress_a(ra), .rdaddress_b(rb), .qa, .qb);

  always #5 clk = ~clk;

  function automatic int ref_tansig(int i);
    real v;
    int r;
    v = 8192.0 * $tanh(real'(i - 8192) / real'(SF));
    r = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    if (r > 8191) r = 8191;
    if (r < -8192) r = -8192;
    return r;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wa [4];
    int wd [4];
    // sweep both read ports, one new address per clock
    for (int n = 0; n < N + 1; n++) begin
      @(negedge clk);
      if (n < N) begin
        ra = AW'(n);
        rb = AW'(N - 1 - n);
        qea.push_back(ref_tansig(n));
        qeb.push_back(ref_tansig(N - 1 - n));
      end
      @(posedge clk); #1;
      if (n >= 1) begin
        checks += 2;
        if (int'(qa) != qea[0]) begin failures++; if (failures < 10) $display("A[%0d]: got %0d want %0d", n - 1, qa, qea[0]); end
        if (int'(qb) != qeb[0]) begin failures++; if (failures < 10) $display("B: got %0d want %0d", qb, qeb[0]); end
        void'(qea.pop_front());
        void'(qeb.pop_front());
      end
    end
    // write port
    for (int i = 0; i < 4; i++) begin
      wa[i] = int'($urandom_range(0, N - 1));
      wd[i] = int'($urandom_range(0, 16383)) - 8192;
      @(negedge clk);
      wren = 1'b1; wraddress = AW'(wa[i]); data = DW'(wd[i]);
    end
    @(negedge clk);
    wren = 1'b0;
    for (int i = 0; i < 4; i++) begin
      int last;
      last = wd[i];
      for (int j = i + 1; j < 4; j++) if (wa[j] == wa[i]) last = wd[j];
      @(negedge clk);
      ra = AW'(wa[i]); rb = AW'(wa[i]);
      @(posedge clk); @(posedge clk); #1;
      checks += 2;
      if (int'(qa) != last) begin failures++; $display("write A: got %0d want %0d", qa, last); end
      if (int'(qb) != last) begin failures++; $display("write B: got %0d want %0d", qb, last); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
