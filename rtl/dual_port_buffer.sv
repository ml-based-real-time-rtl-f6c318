// dual_port_buffer: an on-chip RAM between the processor and the U-Net IP.
//
// Holds DEPTH16 16-bit samples. Port A faces the processor bridge and is 32
// bits wide: word a holds sample 2a in bits 15:0 and sample 2a+1 in bits
// 31:16. Port B faces the IP's memory-mapped host and is 16 bits wide, one
// sample per word. Both ports are Avalon-MM agents with a fixed read latency
// of one cycle (readdatavalid) and no wait states. A same-cycle write to the
// same sample from both ports keeps port B's value.
//
// Two instances form the input buffer (260 samples) and output buffer (520
// samples). The two RAMs, their 32-bit processor port and 16-bit IP port
// follow the published system; byte lane order, read latency and collision
// rule are this implementation's choices.
module dual_port_buffer #(
  parameter int DEPTH16 = 260
) (
  input  logic                clk,
  input  logic                rst_n,
  input  unet_pkg::avmm_req_t a_req,
  output unet_pkg::avmm_rsp_t a_rsp,
  input  unet_pkg::avmm_req_t b_req,
  output unet_pkg::avmm_rsp_t b_rsp
);
  import unet_pkg::*;

  localparam int DEPTH32 = (DEPTH16 + 1) / 2;

  localparam int BW = $clog2(2 * DEPTH32);

  logic [15:0] mem [2*DEPTH32];

  logic a_hit, b_hit;
  assign a_hit = int'(a_req.address) < DEPTH32;
  assign b_hit = int'(b_req.address) < DEPTH16;

  always_ff @(posedge clk) begin
    if (a_req.write && a_hit) begin
      mem[2*a_req.address]     <= a_req.writedata[15:0];
      mem[2*a_req.address + 1] <= a_req.writedata[31:16];
    end
    if (b_req.write && b_hit) mem[b_req.address[BW-1:0]] <= b_req.writedata[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rsp.readdata <= '0; a_rsp.readdatavalid <= 1'b0;
      b_rsp.readdata <= '0; b_rsp.readdatavalid <= 1'b0;
    end else begin
      a_rsp.readdatavalid <= a_req.read;
      b_rsp.readdatavalid <= b_req.read;
      if (a_req.read)
        a_rsp.readdata <= a_hit ? {mem[2*a_req.address + 1], mem[2*a_req.address]} : '0;
      if (b_req.read)
        b_rsp.readdata <= b_hit ? {16'h0, mem[b_req.address[BW-1:0]]} : '0;
    end
  end

  assign a_rsp.waitrequest = 1'b0;
  assign b_rsp.waitrequest = 1'b0;
endmodule
