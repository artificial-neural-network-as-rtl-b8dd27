// tb_ann_networks: every three-layer network shape of the training study
// (16 inputs; first/second layer 16-12, 14-12, 14-10, 12-10, 12-8, 10-8,
// 10-6, 8-6, 8-4) is built from the same RTL by setting the layer sizes, and
// each is run against its bit-exact model on a synthetic trace.
module tb_ann_networks;
  localparam int NS = 9;
  localparam int L1 [NS] = '{16, 14, 14, 12, 12, 10, 10, 8, 8};
  localparam int L2 [NS] = '{12, 12, 10, 10, 8, 8, 6, 6, 4};

  logic clk = 1'b0;
  logic done [NS];
  int   chk  [NS];
  int   fail [NS];

  always #5 clk = ~clk;

  for (genvar i = 0; i < NS; i++) begin : g_net
    ann_net_check #(.N_IN(16), .N_L1(L1[i]), .N_L2(L2[i])) u_chk (
      .clk, .done(done[i]), .checks(chk[i]), .failures(fail[i]));
  end

  initial begin
    int checks = 0, failures = 0;
    bit all;
    fork
      begin
        do begin
          @(posedge clk);
          all = 1'b1;
          for (int i = 0; i < NS; i++) if (!done[i]) all = 1'b0;
        end while (!all);
      end
      begin
        repeat (20000) @(posedge clk);
        failures++;
        $display("watchdog expired");
      end
    join_any
    for (int i = 0; i < NS; i++) begin
      $display("16-%0d-%0d-1: checks %0d failures %0d", L1[i], L2[i], chk[i], fail[i]);
      checks += chk[i];
      failures += fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
