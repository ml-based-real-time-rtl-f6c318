// upsample1d_layer: UpSampling1D by a factor of 2 (each position repeated).
//
// out[q][c] = in[q/2][c] for q < 2*IN_LEN. Output words are produced in
// order, one per cycle: the source word is read in one cycle and written,
// converted to the output format, in the next.
//
// Timing: start pulse; done is high 2*IN_LEN*CH+3 cycles after start.
//
// The shapes (61->122, 125->250) and formats follow the published network;
// nearest-neighbour repetition is the Keras UpSampling1D behaviour.
module upsample1d_layer #(
  parameter int IN_LEN   = 61,
  parameter int CH       = 8,
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

  localparam int N = 2 * IN_LEN * CH;

  logic        run, vld_d;
  int unsigned q, c, j, j_d;

  assign src_addr = FA_W'((q / 2) * CH + c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; vld_d <= 1'b0; q <= 0; c <= 0; j <= 0; j_d <= 0;
      done <= 1'b0; dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= vld_d;
      if (vld_d) begin
        dst_addr <= FA_W'(j_d);
        dst_data <= requant(ACC_W'(src_data), IN_FRAC, OUT_FRAC);
      end
      if (vld_d && j_d == N - 1) done <= 1'b1;
      vld_d <= run;
      j_d   <= j;
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
