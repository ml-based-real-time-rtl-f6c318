// unet_mm_wrapper: the memory-mapped interface wrapped around the U-Net core.
//
// Instead of waiting for data to be streamed in, the IP fetches it itself.
// On a start pulse from the control block (conduit) it acts as an Avalon-MM
// host: it reads the N_IN input samples from the input buffer in address
// order, 0 .. N_IN-1, and writes them into the core's input map; it starts
// the core and waits for its done; then it reads the N_OUT results from the
// core and writes them to the output buffer, again in address order. When the
// last write is accepted it pulses done on the conduit. busy is high from the
// cycle after start until done.
//
// Avalon rules kept: address and read/write are held while waitrequest is
// high; read data is taken on readdatavalid, so any read latency works. At
// most N_IN reads are outstanding.
//
// Timing with no wait states and read latency 1: N_IN+2 cycles of input
// reads, the core's run time plus 2, then 2 cycles per output word.
//
// The sequential memory-mapped access of both buffers and the start/done
// conduit to the control follow the published system; the conduit signal
// set and the state sequence are this implementation's choices.
module unet_mm_wrapper #(
  parameter int N_IN  = 260,
  parameter int N_OUT = 520
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // conduit to the control block
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // Avalon-MM host to the input buffer (16-bit port)
  output unet_pkg::avmm_req_t       in_req,
  input  unet_pkg::avmm_rsp_t       in_rsp,
  // Avalon-MM host to the output buffer (16-bit port)
  output unet_pkg::avmm_req_t       out_req,
  input  unet_pkg::avmm_rsp_t       out_rsp,
  // U-Net core
  output logic                      core_start,
  input  logic                      core_done,
  output logic                      core_in_we,
  output logic [unet_pkg::FA_W-1:0] core_in_addr,
  output unet_pkg::act_t            core_in_data,
  output logic [unet_pkg::FA_W-1:0] core_res_addr,
  input  unet_pkg::act_t            core_res_data
);
  import unet_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_READ, S_RUN, S_WAIT, S_FETCH, S_SEND} state_t;
  state_t state;

  int unsigned n_iss, n_rcv, j;

  // host request, combinational from state and counters
  always_comb begin
    in_req  = '0;
    out_req = '0;
    if (state == S_READ && n_iss < N_IN) begin
      in_req.read    = 1'b1;
      in_req.address = 16'(n_iss);
    end
    if (state == S_SEND) begin
      out_req.write     = 1'b1;
      out_req.address   = 16'(j);
      out_req.writedata = {16'h0, core_res_data};
    end
  end

  assign core_res_addr = FA_W'(j);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_iss <= 0; n_rcv <= 0; j <= 0;
      done <= 1'b0; core_start <= 1'b0;
      core_in_we <= 1'b0; core_in_addr <= '0; core_in_data <= '0;
    end else begin
      done       <= 1'b0;
      core_start <= 1'b0;
      core_in_we <= 1'b0;
      case (state)
        S_IDLE: if (start) begin n_iss <= 0; n_rcv <= 0; j <= 0; state <= S_READ; end
        S_READ: begin
          if (in_req.read && !in_rsp.waitrequest) n_iss <= n_iss + 1;
          if (in_rsp.readdatavalid) begin
            core_in_we   <= 1'b1;
            core_in_addr <= FA_W'(n_rcv);
            core_in_data <= act_t'(in_rsp.readdata[15:0]);
            n_rcv        <= n_rcv + 1;
            if (n_rcv == N_IN - 1) state <= S_RUN;
          end
        end
        S_RUN:  begin core_start <= 1'b1; state <= S_WAIT; end
        S_WAIT: if (core_done) begin j <= 0; state <= S_FETCH; end
        S_FETCH: state <= S_SEND;       // core result register settles
        S_SEND: if (!out_rsp.waitrequest) begin
          if (j == N_OUT - 1) begin state <= S_IDLE; done <= 1'b1; end
          else begin j <= j + 1; state <= S_FETCH; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Avalon host rule: a request is held stable while waitrequest is high
  property p_hold_read;
    @(posedge clk) disable iff (!rst_n)
      (in_req.read && in_rsp.waitrequest) |=> (in_req.read && $stable(in_req.address));
  endproperty
  property p_hold_write;
    @(posedge clk) disable iff (!rst_n)
      (out_req.write && out_rsp.waitrequest) |=>
        (out_req.write && $stable(out_req.address) && $stable(out_req.writedata));
  endproperty
  a_hold_read:  assert property (p_hold_read);
  a_hold_write: assert property (p_hold_write);
endmodule
