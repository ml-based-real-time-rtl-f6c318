// conv1d_layer: one Conv1D layer of the U-Net with ReLU.
//
// Computes out[p][o] = relu(b[o] + sum_{k<K, c<CIN} w[k][c][o] * in[p*STRIDE+k][c])
// for p = 0 .. OUT_LEN-1 ("valid" padding). Maps are stored position-major:
// word p*CH + c. For one output position the K*CIN input words are adjacent,
// so they are read one per cycle from address p*STRIDE*CIN + t; each word is
// multiplied by COUT weights at once (COUT multipliers, each reused K*CIN
// times per position). The accumulators are then rounded to the layer's
// format and written one per cycle.
//
// Timing: start is a one-cycle pulse; done is high OUT_LEN*(K*CIN+COUT+1)+2
// cycles after start. Source reads have one cycle of latency.
// Parameters load through prm_*: index (k*CIN+c)*COUT+o for weights (the
// Keras kernel order), then K*CIN*COUT+o for biases.
//
// The kernel size 2, channel counts, strides and output precisions come from
// the published network; the multiplier arrangement, a single rounding at
// the end of the sum and the load port are this implementation's choices.
module conv1d_layer #(
  parameter int IN_LEN   = 260,
  parameter int CIN      = 1,
  parameter int COUT     = 4,
  parameter int K        = 2,
  parameter int STRIDE   = 1,
  parameter int IN_FRAC  = 9,
  parameter int OUT_FRAC = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        done,
  output logic [unet_pkg::FA_W-1:0]   src_addr,
  input  unet_pkg::act_t              src_data,
  output logic                        dst_we,
  output logic [unet_pkg::FA_W-1:0]   dst_addr,
  output unet_pkg::act_t              dst_data,
  input  logic                        prm_we,
  input  logic [unet_pkg::PRM_AW-1:0] prm_addr,
  input  logic [7:0]                  prm_data
);
  import unet_pkg::*;

  localparam int OUT_LEN = (IN_LEN - K) / STRIDE + 1;
  localparam int TAPS    = K * CIN;
  localparam int NW      = TAPS * COUT;
  localparam int P_FRAC  = IN_FRAC + W_FRAC;    // product fraction bits
  localparam int B_SH    = P_FRAC - B_FRAC;     // bias alignment

  typedef enum logic [1:0] {S_IDLE, S_READ, S_LAST, S_WRITE} state_t;
  state_t state;

  logic signed [W_W-1:0]   w   [TAPS][COUT];
  logic signed [B_W-1:0]   b   [COUT];
  logic signed [ACC_W-1:0] acc [COUT];

  int unsigned p, t, t_d, o;
  logic        vld_d;

  // Parameter load
  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (int'(prm_addr) < NW) w[int'(prm_addr) / COUT][int'(prm_addr) % COUT] <= prm_data;
      else if (int'(prm_addr) < NW + COUT) b[int'(prm_addr) - NW] <= prm_data;
    end
  end

  assign src_addr = FA_W'(p * STRIDE * CIN + t);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; p <= 0; t <= 0; t_d <= 0; o <= 0; vld_d <= 1'b0;
      done <= 1'b0; dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
      for (int i = 0; i < COUT; i++) acc[i] <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= 1'b0;
      vld_d  <= 1'b0;
      // accumulate the word that arrives this cycle
      if (vld_d)
        for (int i = 0; i < COUT; i++)
          acc[i] <= acc[i] + ACC_W'(src_data) * ACC_W'(w[t_d][i]);
      case (state)
        S_IDLE: if (start) begin
          p <= 0; t <= 0; state <= S_READ;
          for (int i = 0; i < COUT; i++) acc[i] <= ACC_W'(b[i]) <<< B_SH;
        end
        S_READ: begin
          vld_d <= 1'b1; t_d <= t;
          if (t == TAPS - 1) state <= S_LAST;
          else t <= t + 1;
        end
        S_LAST: begin
          o <= 0; state <= S_WRITE;
        end
        S_WRITE: begin
          dst_we   <= 1'b1;
          dst_addr <= FA_W'(p * COUT + o);
          dst_data <= requant(acc[o] < 0 ? '0 : acc[o], P_FRAC, OUT_FRAC);
          if (o == COUT - 1) begin
            t <= 0;
            for (int i = 0; i < COUT; i++) acc[i] <= ACC_W'(b[i]) <<< B_SH;
            if (p == OUT_LEN - 1) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              p <= p + 1; state <= S_READ;
            end
          end else o <= o + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
