// maxpool1d_layer: MaxPooling1D with window 2 and stride 2.
//
// out[p][c] = max(in[2p][c], in[2p+1][c]) for p < IN_LEN/2 (a trailing odd
// position is dropped, so 127 -> 63). The two words of a window are read in
// consecutive cycles and the result is written in the third.
//
// Timing: start pulse; done is high 3*(IN_LEN/2)*CH+2 cycles after start.
//
// The output sizes (258->129, 127->63) and format follow the published
// network; that the pooling takes the maximum is this implementation's
// reading of the layer name "Pool".
module maxpool1d_layer #(
  parameter int IN_LEN   = 258,
  parameter int CH       = 4,
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

  localparam int OUT_LEN = IN_LEN / 2;

  typedef enum logic [1:0] {S_IDLE, S_A, S_B, S_W} state_t;
  state_t state;
  int unsigned p, c;
  act_t a;

  always_comb begin
    src_addr = FA_W'((2 * p) * CH + c);
    if (state == S_B) src_addr = FA_W'((2 * p + 1) * CH + c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; p <= 0; c <= 0; a <= '0; done <= 1'b0;
      dst_we <= 1'b0; dst_addr <= '0; dst_data <= '0;
    end else begin
      done   <= 1'b0;
      dst_we <= 1'b0;
      case (state)
        S_IDLE: if (start) begin p <= 0; c <= 0; state <= S_A; end
        S_A:    state <= S_B;
        S_B:    begin a <= src_data; state <= S_W; end
        S_W: begin
          dst_we   <= 1'b1;
          dst_addr <= FA_W'(p * CH + c);
          dst_data <= requant(ACC_W'((src_data > a) ? src_data : a), IN_FRAC, OUT_FRAC);
          state    <= S_A;
          if (c == CH - 1) begin
            c <= 0;
            if (p == OUT_LEN - 1) begin state <= S_IDLE; done <= 1'b1; end
            else p <= p + 1;
          end else c <= c + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
