// tb_neuron -- checks one hidden-type neuron (8-bit inputs, ReLU) and one
// output-type neuron (25-bit inputs, no activation) against a direct
// computation of sum(w*x) + b, with weights, bias and inputs changing every
// clock, and checks that out_valid follows in_valid by exactly 8 cycles.
module tb_neuron;
  localparam int unsigned N_IN = 20, W_W = 12, LAT = 8, N = 1500;
  localparam int unsigned W_XH = 8,  W_YH = W_XH + W_W + 5;
  localparam int unsigned W_XO = 25, W_YO = W_XO + W_W + 5;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [W_XH-1:0] xh [N_IN];
  logic signed [W_XO-1:0] xo [N_IN];
  logic signed [W_W-1:0]  w  [N_IN];
  logic signed [W_W-1:0]  b;
  logic vh, vo;
  logic signed [W_YH-1:0] yh;
  logic signed [W_YO-1:0] yo;

  longint exp_h [$], exp_o [$];
  bit     vld_hist [$];
  int checks = 0, failures = 0, relu_clips = 0;

  neuron #(.N_IN(N_IN), .W_X(W_XH), .W_W(W_W), .RELU(1'b1)) dut_h (
    .clk, .rst_n, .in_valid, .x(xh), .w, .b, .out_valid(vh), .y(yh));
  neuron #(.N_IN(N_IN), .W_X(W_XO), .W_W(W_W), .RELU(1'b0)) dut_o (
    .clk, .rst_n, .in_valid, .x(xo), .w, .b, .out_valid(vo), .y(yo));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N + LAT; k++) begin
      longint sh, so;
      @(negedge clk);
      if (k >= LAT) begin
        checks++;
        if (vh !== vld_hist[0] || vo !== vld_hist[0]) begin
          failures++;
          $display("valid mismatch k=%0d vh=%0b vo=%0b exp=%0b", k, vh, vo, vld_hist[0]);
        end
        if (vld_hist[0]) begin
          checks += 2;
          if (longint'(yh) != exp_h[0]) begin
            failures++;
            if (failures < 10) $display("hidden mismatch k=%0d y=%0d exp=%0d", k, yh, exp_h[0]);
          end
          if (longint'(yo) != exp_o[0]) begin
            failures++;
            if (failures < 10) $display("output mismatch k=%0d y=%0d exp=%0d", k, yo, exp_o[0]);
          end
        end
        void'(exp_h.pop_front()); void'(exp_o.pop_front()); void'(vld_hist.pop_front());
      end
      in_valid = ($urandom_range(0, 3) != 0);
      b = W_W'($urandom);
      sh = longint'(b); so = longint'(b);
      for (int i = 0; i < N_IN; i++) begin
        w[i]  = (k % 50 == 7) ? W_W'(-2048) : W_W'($urandom);
        xh[i] = (k % 50 == 7) ? W_XH'(-128) : W_XH'($urandom_range(0, 40));
        xo[i] = (k % 50 == 9) ? {1'b0, {(W_XO-1){1'b1}}} : W_XO'($urandom);
        sh += longint'(w[i]) * longint'(xh[i]);
        so += longint'(w[i]) * longint'(xo[i]);
      end
      if (sh < 0 && in_valid) relu_clips++;
      exp_h.push_back(sh < 0 ? 0 : sh);
      exp_o.push_back(so);
      vld_hist.push_back(in_valid);
    end
    checks++;
    if (relu_clips == 0) begin
      failures++;
      $display("ReLU never clipped a negative sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
