// zeropad1d_layer: ZeroPadding1D, PAD_L zero positions before the map and
// PAD_R after it.
//
// out[q][c] = in[q-PAD_L][c] for PAD_L <= q < PAD_L+IN_LEN, else 0. One
// output word per cycle; the source word is read one cycle ahead.
//
// Timing: start pulse; done is high (IN_LEN+PAD_L+PAD_R)*CH+3 cycles after
// start.
//
// The padded lengths (122->127, 250->258) follow the published network; how
// the padding is split between the two ends is this implementation's
// choice (the smaller half in front).
module zeropad1d_layer #(
  parameter int IN_LEN   = 122,
  parameter int CH       = 8,
  parameter int PAD_L    = 2,
  parameter int PAD_R    = 3,
  parameter int IN_FRAC  = 7,
  parameter int OUT_FRAC = 7
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      done,
  output logic [unet_pkg::FA_W-1:0] src_addr,
  input  unet_pkg::act_t            src_data,
  output logic                      dst_we,
  output logic [unet_pkg::FA_W-1:0] dst_addr,
  output unet_pkg::act_t            dst_data
);
  import unet_pkg::*;

  localparam int OUT_LEN = IN_LEN + PAD_L + PAD_R;
  localparam int N       = OUT_LEN * CH;

  logic        run, vld_d, pad_d;
  int unsigned q, c, j, j_d;

  assign src_addr = (q >= PAD_L && q < PAD_L + IN_LEN) ? FA_W'((q - PAD_L) * CH + c) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; vld_d <= 1'b0; pad_d <= 1'b0; q <= 0; c <= 0; j <= 0; j_d <= 0;
      done <= 1'b0; dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= vld_d;
      if (vld_d) begin
        dst_addr <= FA_W'(j_d);
        dst_data <= pad_d ? '0 : requant(ACC_W'(src_data), IN_FRAC, OUT_FRAC);
      end
      if (vld_d && j_d == N - 1) done <= 1'b1;
      vld_d <= run;
      j_d   <= j;
      pad_d <= (q < PAD_L) || (q >= PAD_L + IN_LEN);
      if (start && !run) begin
        run <= 1'b1; q <= 0; c <= 0; j <= 0;
      end else if (run) begin
        if (j == N - 1) run <= 1'b0;
        j <= j + 1;
        if (c == CH - 1) begin c <= 0; q <= q + 1; end
        else c <= c + 1;
      end
    end
  end
endmodule
