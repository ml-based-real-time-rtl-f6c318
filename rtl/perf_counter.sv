// perf_counter: latency and throughput counters for the U-Net IP.
//
// Counts clock cycles from a start pulse to the matching done pulse. On done
// it records the count as last_cycles (a start and a done in consecutive
// cycles give 1), keeps the largest count seen in max_cycles and increments
// frames. clear zeroes all three. A start while a measurement is running is
// ignored, as the IP ignores it too.
//
// The published system measured latency with performance counters placed
// next to the IP; what is counted and the register widths are this
// implementation's choices.
module perf_counter #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         start,
  input  logic         done,
  output logic [W-1:0] last_cycles,
  output logic [W-1:0] max_cycles,
  output logic [W-1:0] frames
);
  logic         running;
  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; cnt <= '0; last_cycles <= '0; max_cycles <= '0; frames <= '0;
    end else if (clear) begin
      running <= 1'b0; cnt <= '0; last_cycles <= '0; max_cycles <= '0; frames <= '0;
    end else begin
      if (start && !running) begin
        running <= 1'b1; cnt <= W'(1);
      end else if (running && done) begin
        running     <= 1'b0;
        last_cycles <= cnt;
        frames      <= frames + 1'b1;
        if (cnt > max_cycles) max_cycles <= cnt;
      end else if (running) begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
