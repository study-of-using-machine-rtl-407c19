// tb_adder_tree -- checks the 32-input, 5-level adder tree: sums of random
// and extreme signed inputs, and the fixed 5-cycle latency.
module tb_adder_tree;
  localparam int unsigned N_IN = 32, W_IN = 20, LEVELS = 5, N = 1000;
  logic clk = 1'b0;
  logic signed [W_IN-1:0] din [N_IN];
  logic signed [W_IN+LEVELS-1:0] sum;
  longint exp_q [$];
  int checks = 0, failures = 0;

  adder_tree #(.N_IN(N_IN), .W_IN(W_IN), .LEVELS(LEVELS)) dut (.clk, .din, .sum);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N + LEVELS; k++) begin
      longint s;
      s = 0;
      @(negedge clk);
      if (k >= LEVELS) begin
        checks++;
        if (longint'(sum) != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("mismatch k=%0d sum=%0d exp=%0d", k, sum, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      for (int j = 0; j < N_IN; j++) begin
        case (k % 5)
          0: din[j] = {1'b1, {(W_IN-1){1'b0}}};   // most negative
          1: din[j] = {1'b0, {(W_IN-1){1'b1}}};   // most positive
          2: din[j] = (j == k % N_IN) ? W_IN'(1) : '0;  // one-hot, finds each leaf
          default: din[j] = W_IN'($urandom);
        endcase
        s += longint'(din[j]);
      end
      exp_q.push_back(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
