// fmap_ram: one feature map of the U-Net, held between two layers.
// A simple dual-port memory of DEPTH 16-bit words: one write port, one read
// port with a registered output (data appears the cycle after the address).
// Layers run one after another, so a single read port serves each map even
// where a skip connection reads it a second time.
module fmap_ram #(
  parameter int DEPTH = 260
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [unet_pkg::FA_W-1:0] waddr,
  input  unet_pkg::act_t           wdata,
  input  logic [unet_pkg::FA_W-1:0] raddr,
  output unet_pkg::act_t           rdata
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  unet_pkg::act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr[AW-1:0]] <= wdata;
    rdata <= (int'(raddr) < DEPTH) ? mem[raddr[AW-1:0]] : '0;
  end
endmodule
