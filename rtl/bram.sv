// bram: block-RAM model with one byte-enabled write port and two read ports.
//
// Writes of 'wdata' lanes selected by 'we' (one bit per NBYTE-th of the word)
// take effect at the clock edge. Each read port returns mem[raddr] one clock
// after the address (registered memory output). A read of the address being
// written in the same clock returns the old contents. An unused second read
// port is removed by synthesis. The contents are not reset.
module bram #(
  parameter int DW    = 32,
  parameter int DEPTH = 1024,
  parameter int NBYTE = 1,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [NBYTE-1:0] we,
  input  logic [AW-1:0]    waddr,
  input  logic [DW-1:0]    wdata,
  input  logic [AW-1:0]    raddr_a,
  output logic [DW-1:0]    rdata_a,
  input  logic [AW-1:0]    raddr_b,
  output logic [DW-1:0]    rdata_b
);
  localparam int BW = DW / NBYTE;

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NBYTE; i++)
      if (we[i]) mem[waddr][i*BW +: BW] <= wdata[i*BW +: BW];
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

  initial assert (DW % NBYTE == 0) else $error("bram: DW must be a multiple of NBYTE");

endmodule
