// unet_control: the handshake between the processor and the U-Net IP.
//
// The processor, after writing a frame into the input buffer, writes GO to
// the control register; this block then pulses ip_start over the conduit to
// the IP (unless the IP is busy, in which case GO is ignored). When the IP
// pulses ip_done, having written its results into the output buffer, the
// block sets DONE and, if enabled, raises irq (level) so the processor reads
// the results back. The processor clears DONE, and with it irq, by writing 1
// to STATUS bit 1.
//
// Register map (32-bit words, offset = address bits 3:0, read latency 1):
//   0 CTRL    W bit0 GO (self-clearing), R/W bit1 IRQ_EN
//   1 STATUS  R bit0 BUSY, bit1 DONE; W bit1=1 clears DONE
//   2 LAT_LAST  cycles from ip_start to ip_done of the last frame
//   3 LAT_MAX   largest such count
//   4 FRAMES    frames completed
//   5 PERF_CLR  W any value clears the three counters
// The steps (write complete -> start IP -> IP done -> interrupt -> read back)
// follow the published system; the register map and the GO/DONE/IRQ_EN
// bits are this implementation's choices.
module unet_control (
  input  logic                clk,
  input  logic                rst_n,
  input  unet_pkg::avmm_req_t csr_req,
  output unet_pkg::avmm_rsp_t csr_rsp,
  output logic                ip_start,
  input  logic                ip_busy,
  input  logic                ip_done,
  output logic                irq,
  output logic                perf_clear,
  input  logic [31:0]         lat_last,
  input  logic [31:0]         lat_max,
  input  logic [31:0]         frames
);
  logic       irq_en, done_flag;
  logic [3:0] off;
  assign off = csr_req.address[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_en <= 1'b0; done_flag <= 1'b0; ip_start <= 1'b0; perf_clear <= 1'b0;
      csr_rsp.readdata <= '0; csr_rsp.readdatavalid <= 1'b0;
    end else begin
      ip_start   <= 1'b0;
      perf_clear <= 1'b0;
      if (ip_done) done_flag <= 1'b1;
      if (csr_req.write) begin
        case (off)
          4'd0: begin
            irq_en <= csr_req.writedata[1];
            if (csr_req.writedata[0] && !ip_busy && !ip_start) begin
              ip_start  <= 1'b1;
              done_flag <= 1'b0;
            end
          end
          4'd1: if (csr_req.writedata[1] && !ip_done) done_flag <= 1'b0;
          4'd5: perf_clear <= 1'b1;
          default: ;
        endcase
      end
      csr_rsp.readdatavalid <= csr_req.read;
      if (csr_req.read)
        case (off)
          4'd0:    csr_rsp.readdata <= {30'd0, irq_en, 1'b0};
          4'd1:    csr_rsp.readdata <= {30'd0, done_flag, ip_busy};
          4'd2:    csr_rsp.readdata <= lat_last;
          4'd3:    csr_rsp.readdata <= lat_max;
          4'd4:    csr_rsp.readdata <= frames;
          default: csr_rsp.readdata <= '0;
        endcase
    end
  end

  assign csr_rsp.waitrequest = 1'b0;
  assign irq = done_flag & irq_en;
endmodule
