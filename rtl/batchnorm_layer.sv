// batchnorm_layer: the input BatchNormalization layer of the U-Net.
//
// Applies the folded normalisation y[i] = scale[c]*x[i] + shift[c] to every
// word of a LEN x CH map (c = i mod CH), then rounds and saturates to the
// layer's format. Inference-time batch normalisation reduces to this affine
// map once mean, variance, gamma and beta are folded into scale and shift.
// One word is read per cycle and written one cycle later.
//
// Timing: start pulse; done is high LEN*CH+3 cycles after start.
// Parameters: index c is scale[c] (ac_fixed<8,3>), CH+c is shift[c]
// (ac_fixed<8,4>).
//
// The layer's place, shape (260,1) and output format ac_fixed<16,7> follow
// the published network; folding into scale/shift and the use of the
// weight and bias formats for them are this implementation's choices.
module batchnorm_layer #(
  parameter int LEN      = 260,
  parameter int CH       = 1,
  parameter int IN_FRAC  = 9,
  parameter int OUT_FRAC = 9
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

  localparam int N      = LEN * CH;
  localparam int P_FRAC = IN_FRAC + W_FRAC;

  logic signed [W_W-1:0] scale [CH];
  logic signed [B_W-1:0] shift [CH];

  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (int'(prm_addr) < CH) scale[int'(prm_addr)] <= prm_data;
      else if (int'(prm_addr) < 2 * CH) shift[int'(prm_addr) - CH] <= prm_data;
    end
  end

  logic        run, vld_d;
  int unsigned i, i_d;

  assign src_addr = FA_W'(i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; vld_d <= 1'b0; i <= 0; i_d <= 0; done <= 1'b0;
      dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= vld_d;
      if (vld_d) begin
        dst_addr <= FA_W'(i_d);
        dst_data <= requant(ACC_W'(src_data) * ACC_W'(scale[i_d % CH])
                            + (ACC_W'(shift[i_d % CH]) <<< (P_FRAC - B_FRAC)),
                            P_FRAC, OUT_FRAC);
      end
      vld_d <= run;
      i_d   <= i;
      if (start && !run) begin
        run <= 1'b1; i <= 0;
      end else if (run) begin
        if (i == N - 1) run <= 1'b0;
        else i <= i + 1;
      end
      if (vld_d && i_d == N - 1) done <= 1'b1;
    end
  end
endmodule
