// tansig_ram3port: the neuron transfer function as a table in a 3-port RAM.
//
// One 2^AW x DW array with a write port (wren, wraddress, data) and two
// independent read ports (rdaddress_a -> qa, rdaddress_b -> qb), so that two
// neurons share one copy of the table. At start-up the array holds
//   q(idx) = round(2^(DW-1) * (2 / (1 + exp(-2 (idx - 2^(AW-1)) / SF)) - 1)),
// clipped to the signed DW-bit range, i.e. tansig over about -5.33..+5.33
// for the default SF = 1536. In the network the write port is tied off,
// which makes the RAM a dual-output ROM. The 16384 x 14-bit size, SF, the
// port set and the sharing follow the published design; there the two
// read ports are two vendor dual-port RAMs fed with the same write signals and
// an initialisation file, here one array with two read ports whose contents
// are computed at elaboration. Timing: read addresses and outputs are
// registered, data appear 2 cycles after the address; a write takes effect on
// the clock edge (a read of the same word in that cycle sees the old word).
// The memory array uses a plain always block because it is also written by
// the initialisation.
module tansig_ram3port #(
  parameter int AW = 14,
  parameter int DW = 14,
  parameter int SF = 1536
) (
  input  logic                 clk,
  input  logic                 wren,
  input  logic signed [DW-1:0] data,
  input  logic        [AW-1:0] wraddress,
  input  logic        [AW-1:0] rdaddress_a,
  input  logic        [AW-1:0] rdaddress_b,
  output logic signed [DW-1:0] qa,
  output logic signed [DW-1:0] qb
);

  logic signed [DW-1:0] mem [2**AW];
  logic        [AW-1:0] ra_q, rb_q;

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = DW'(ann_pkg::tansig_word(i, AW, DW, SF));
  end

  always @(posedge clk) begin
    if (wren) mem[wraddress] <= data;
  end

  always_ff @(posedge clk) begin
    ra_q <= rdaddress_a;
    rb_q <= rdaddress_b;
    qa   <= mem[ra_q];
    qb   <= mem[rb_q];
  end

endmodule
