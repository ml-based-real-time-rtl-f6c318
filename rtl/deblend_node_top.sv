// deblend_node_top: FPGA side of the beam-loss de-blending central node.
//
// The processor (not part of this RTL) reaches the fabric through one 32-bit
// memory-mapped bridge port (hps_*). Behind it sit the input buffer, the
// output buffer, the control block with its performance counters and a
// window for loading the network's parameters. The U-Net IP (memory-mapped
// wrapper plus core) reads the input buffer and writes the output buffer
// through its own 16-bit ports of the same two RAMs.
//
// One frame: the processor writes 130 words (260 samples, ac_fixed<16,7>)
// into the input buffer, writes GO to the control register, waits for irq,
// reads 260 words (520 results, ac_fixed<16,6>) from the output buffer and
// clears DONE.
//
// Bridge address map (32-bit word addresses, 19 bits):
//   0x00000-0x0007F  input buffer   (word a = samples 2a, 2a+1)
//   0x00200-0x00305  output buffer  (word a = results 2a, 2a+1)
//   0x00400-0x0040F  control registers (see unet_control)
//   0x40000-0x7FFFF  parameter window: word 0x40000+i loads parameter i
//                    from writedata[7:0]; reads return 0
// The bridge port has a fixed read latency of one cycle and never stalls.
//
// The block set and their connections (bridge, two dual-port buffers, control
// with a conduit to the wrapper, memory-mapped IP, interrupt) follow the
// published system; the address map and the parameter window are this
// implementation's choices.
module deblend_node_top (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [18:0] hps_address,
  input  logic        hps_read,
  input  logic        hps_write,
  input  logic [31:0] hps_writedata,
  output logic [31:0] hps_readdata,
  output logic        hps_readdatavalid,
  output logic        irq
);
  import unet_pkg::*;

  // ------------------------------------------------------ bridge decoding
  avmm_req_t in_a_req, out_a_req, csr_req;
  avmm_rsp_t in_a_rsp, out_a_rsp, csr_rsp;
  prm_wr_t   prm;
  logic      sel_in, sel_out, sel_csr, sel_prm;
  logic      other_rd_q;

  assign sel_in  = (hps_address[18:9] == 10'h000);
  assign sel_out = (hps_address[18:9] == 10'h001);
  assign sel_csr = (hps_address[18:4] == 15'h0040);
  assign sel_prm = hps_address[18];

  always_comb begin
    in_a_req  = '{address: 16'(hps_address[8:0]), read: hps_read && sel_in,
                  write: hps_write && sel_in, writedata: hps_writedata};
    out_a_req = '{address: 16'(hps_address[8:0]), read: hps_read && sel_out,
                  write: hps_write && sel_out, writedata: hps_writedata};
    csr_req   = '{address: 16'(hps_address[3:0]), read: hps_read && sel_csr,
                  write: hps_write && sel_csr, writedata: hps_writedata};
    prm       = '{we: hps_write && sel_prm, addr: hps_address[PRM_AW-1:0],
                  data: hps_writedata[7:0]};
  end

  // reads of the parameter window or of unmapped space return 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) other_rd_q <= 1'b0;
    else        other_rd_q <= hps_read && !(sel_in || sel_out || sel_csr);
  end

  always_comb begin
    hps_readdatavalid = in_a_rsp.readdatavalid || out_a_rsp.readdatavalid ||
                        csr_rsp.readdatavalid || other_rd_q;
    hps_readdata = in_a_rsp.readdatavalid  ? in_a_rsp.readdata  :
                   out_a_rsp.readdatavalid ? out_a_rsp.readdata :
                   csr_rsp.readdatavalid   ? csr_rsp.readdata   : 32'h0;
  end

  // ------------------------------------------------------------- buffers
  avmm_req_t in_b_req, out_b_req;
  avmm_rsp_t in_b_rsp, out_b_rsp;

  dual_port_buffer #(.DEPTH16(N_INPUTS)) u_in_buf (
    .clk, .rst_n, .a_req(in_a_req), .a_rsp(in_a_rsp), .b_req(in_b_req), .b_rsp(in_b_rsp));

  dual_port_buffer #(.DEPTH16(N_OUTPUTS)) u_out_buf (
    .clk, .rst_n, .a_req(out_a_req), .a_rsp(out_a_rsp), .b_req(out_b_req), .b_rsp(out_b_rsp));

  // ------------------------------------------------- control and counters
  logic        ip_start, ip_busy, ip_done, perf_clear;
  logic [31:0] lat_last, lat_max, frames;

  unet_control u_ctrl (
    .clk, .rst_n, .csr_req, .csr_rsp, .ip_start, .ip_busy, .ip_done, .irq,
    .perf_clear, .lat_last, .lat_max, .frames);

  perf_counter #(.W(32)) u_perf (
    .clk, .rst_n, .clear(perf_clear), .start(ip_start), .done(ip_done),
    .last_cycles(lat_last), .max_cycles(lat_max), .frames);

  // ------------------------------------------------------------ U-Net IP
  logic            core_start, core_done, core_busy, core_in_we;
  logic [FA_W-1:0] core_in_addr, core_res_addr;
  act_t            core_in_data, core_res_data;

  unet_mm_wrapper #(.N_IN(N_INPUTS), .N_OUT(N_OUTPUTS)) u_wrap (
    .clk, .rst_n, .start(ip_start), .busy(ip_busy), .done(ip_done),
    .in_req(in_b_req), .in_rsp(in_b_rsp), .out_req(out_b_req), .out_rsp(out_b_rsp),
    .core_start, .core_done, .core_in_we, .core_in_addr, .core_in_data,
    .core_res_addr, .core_res_data);

  unet_core u_core (
    .clk, .rst_n, .start(core_start), .done(core_done), .busy(core_busy),
    .in_we(core_in_we), .in_addr(core_in_addr), .in_data(core_in_data),
    .res_addr(core_res_addr), .res_data(core_res_data), .prm);

endmodule
