// tb_dsp_mult -- checks products and the fixed 3-cycle latency of dsp_mult
// with random signed operands, including the extreme values.
module tb_dsp_mult;
  localparam int unsigned W_A = 8, W_B = 12, LAT = 3, N = 2000;
  logic clk = 1'b0;
  logic signed [W_A-1:0] a;
  logic signed [W_B-1:0] b;
  logic signed [W_A+W_B-1:0] p;
  longint exp_q [$];
  int checks = 0, failures = 0;

  dsp_mult #(.W_A(W_A), .W_B(W_B)) dut (.clk, .a, .b, .p);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N + LAT; k++) begin
      @(negedge clk);
      if (k >= LAT) begin
        checks++;
        if (longint'(p) != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("mismatch k=%0d p=%0d exp=%0d", k, p, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      case (k % 7)
        0: begin a = -128; b = -2048; end
        1: begin a = 127;  b = 2047;  end
        2: begin a = -128; b = 2047;  end
        default: begin a = W_A'($urandom); b = W_B'($urandom); end
      endcase
      exp_q.push_back(longint'(a) * longint'(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
