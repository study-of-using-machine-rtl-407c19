// tb_hit_window -- streams random counts with gaps and checks that the
// window holds the last 20 samples in order (index 0 oldest) and that
// window_valid pulses once per sample from the 20th sample on.
module tb_hit_window;
  localparam int unsigned N_TAPS = 20, W_HIT = 8;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W_HIT-1:0] nhit = '0;
  logic signed [W_HIT-1:0] window [N_TAPS];
  logic window_valid;
  logic signed [W_HIT-1:0] hist [$];
  int checks = 0, failures = 0, samples = 0;

  hit_window #(.N_TAPS(N_TAPS), .W_HIT(W_HIT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit last_valid = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      // Outputs reflect the sample taken on the edge just passed.
      checks++;
      if (window_valid !== (last_valid && samples >= N_TAPS)) begin
        failures++;
        if (failures < 10) $display("k=%0d window_valid=%0b samples=%0d", k, window_valid, samples);
      end
      if (samples >= N_TAPS) begin
        for (int i = 0; i < N_TAPS; i++) begin
          checks++;
          if (window[i] !== hist[hist.size() - N_TAPS + i]) begin
            failures++;
            if (failures < 10) $display("k=%0d tap %0d = %0d exp %0d", k, i, window[i], hist[hist.size() - N_TAPS + i]);
          end
        end
      end
      in_valid = ($urandom_range(0, 4) != 0);
      nhit = W_HIT'($urandom_range(0, 127));
      last_valid = in_valid;
      if (in_valid) begin
        hist.push_back(nhit);
        samples++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
