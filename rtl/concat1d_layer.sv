// concat1d_layer: Concatenate along the channel axis (the U-Net skip join).
//
// out[q][c] = a[q][c] for c < CA, b[q][c-CA] for CA <= c < CA+CB, over LEN
// positions. Both sources are read every cycle at their own addresses; the
// word from the selected one is converted to the output format and written
// one cycle later.
//
// Timing: start pulse; done is high LEN*(CA+CB)+3 cycles after start.
//
// Shapes (127x8 + 127x6 -> 127x14, 258x6 + 258x4 -> 258x10) and formats
// follow the published network; placing the up-sampled path (a) before the
// skip path (b) is this implementation's choice.
module concat1d_layer #(
  parameter int LEN     = 127,
  parameter int CA      = 8,
  parameter int CB      = 6,
  parameter int A_FRAC  = 7,
  parameter int B_FRAC  = 7,
  parameter int OUT_FRAC = 7
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      done,
  output logic [unet_pkg::FA_W-1:0] a_addr,
  input  unet_pkg::act_t            a_data,
  output logic [unet_pkg::FA_W-1:0] b_addr,
  input  unet_pkg::act_t            b_data,
  output logic                      dst_we,
  output logic [unet_pkg::FA_W-1:0] dst_addr,
  output unet_pkg::act_t            dst_data
);
  import unet_pkg::*;

  localparam int CO = CA + CB;
  localparam int N  = LEN * CO;

  logic        run, vld_d, sel_b_d;
  int unsigned q, c, j, j_d;

  assign a_addr = (c < CA) ? FA_W'(q * CA + c) : '0;
  assign b_addr = (c >= CA) ? FA_W'(q * CB + (c - CA)) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; vld_d <= 1'b0; sel_b_d <= 1'b0; q <= 0; c <= 0; j <= 0; j_d <= 0;
      done <= 1'b0; dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= vld_d;
      if (vld_d) begin
        dst_addr <= FA_W'(j_d);
        dst_data <= sel_b_d ? requant(ACC_W'(b_data), B_FRAC, OUT_FRAC)
                            : requant(ACC_W'(a_data), A_FRAC, OUT_FRAC);
      end
      if (vld_d && j_d == N - 1) done <= 1'b1;
      vld_d   <= run;
      j_d     <= j;
      sel_b_d <= (c >= CA);
      if (start && !run) begin
        run <= 1'b1; q <= 0; c <= 0; j <= 0;
      end else if (run) begin
        if (j == N - 1) run <= 1'b0;
        j <= j + 1;
        if (c == CO - 1) begin c <= 0; q <= q + 1; end
        else c <= c + 1;
      end
    end
  end
endmodule
