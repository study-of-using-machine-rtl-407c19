// hit_window -- sliding window of the last N_TAPS fired-PMT counts.
//
// In the detector the trigger receives one count of fired PMTs per clock;
// the network needs the counts of 20 consecutive clocks. Each in_valid
// shifts nhit into the window (window[N_TAPS-1] newest, window[0] oldest,
// the order the stored events use). window_valid is high for one clock after
// each shift once N_TAPS samples have been taken since reset, so a decision
// can be made on every new sample. The window and its 20-clock collection
// follow the paper; the fill counter and valid rule are this design's.
module hit_window #(
  parameter int unsigned N_TAPS = 20,
  parameter int unsigned W_HIT  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [W_HIT-1:0] nhit,
  output logic signed [W_HIT-1:0] window [N_TAPS],
  output logic                    window_valid
);

  localparam int unsigned W_CNT = $clog2(N_TAPS + 1);

  logic [W_CNT-1:0] fill;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_TAPS; i++) window[i] <= '0;
      fill         <= '0;
      window_valid <= 1'b0;
    end else begin
      window_valid <= 1'b0;
      if (in_valid) begin
        for (int unsigned i = 0; i + 1 < N_TAPS; i++) window[i] <= window[i+1];
        window[N_TAPS-1] <= nhit;
        if (fill != W_CNT'(N_TAPS)) fill <= fill + 1'b1;
        window_valid <= (fill >= W_CNT'(N_TAPS - 1));
      end
    end
  end

endmodule
