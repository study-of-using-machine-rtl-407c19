// tb_mlp_core -- runs the 20x20x2 network with a random parameter constant
// (6-bit-range weights) on a stream of dark-noise-like and signal-like hit
// patterns, one per clock with random gaps, and checks every decision, all
// 22 neuron probes and the 16-cycle latency against the reference model.
// It also counts that both decisions and ReLU clipping occurred.
module tb_mlp_core;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam params_t P = random_params(32'd32);
  localparam int unsigned LAT = MLP_LATENCY, N = 1500;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  hit_t hits [N_INPUT];
  logic out_valid, accept;
  hid_t hidden_probe [N_HIDDEN];
  out_t output_probe [N_OUTPUT];

  typedef struct {
    bit     valid;
    longint h [N_INPUT];
  } vec_t;
  vec_t hist [$];
  int checks = 0, failures = 0, n_accept = 0, n_reject = 0, n_clip = 0;

  mlp_core #(.PARAMS(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N + LAT; k++) begin
      @(negedge clk);
      // Hidden probes: input of 8 clocks ago; decision: input of 16 ago.
      if (k >= LAT) begin
        vec_t o, hd;
        o  = hist[hist.size() - LAT];
        hd = hist[hist.size() - LAT / 2];
        checks++;
        if (out_valid !== o.valid) begin
          failures++;
          if (failures < 10) $display("k=%0d out_valid=%0b exp=%0b", k, out_valid, o.valid);
        end
        if (o.valid) begin
          automatic bit e = ref_accept(P, o.h);
          checks += 3;
          if (accept !== e) begin
            failures++;
            if (failures < 10) $display("k=%0d accept=%0b exp=%0b", k, accept, e);
          end
          if (e) n_accept++; else n_reject++;
          for (int m = 0; m < N_OUTPUT; m++)
            if (longint'(output_probe[m]) != ref_output(P, o.h, m)) begin
              failures++;
              if (failures < 10) $display("k=%0d output %0d = %0d exp %0d", k, m, output_probe[m], ref_output(P, o.h, m));
            end
        end else begin
          checks++;
          if (accept !== 1'b0) begin failures++; $display("k=%0d accept without valid", k); end
        end
        if (hd.valid) begin
          for (int n = 0; n < N_HIDDEN; n++) begin
            checks++;
            if (longint'(hidden_probe[n]) != ref_hidden(P, hd.h, n)) begin
              failures++;
              if (failures < 10) $display("k=%0d hidden %0d = %0d exp %0d", k, n, hidden_probe[n], ref_hidden(P, hd.h, n));
            end
          end
        end
      end
      // Next input: dark noise 0..12 per clock, half of them with a signal
      // pulse of up to ~120 hits added around a random clock.
      v.valid = ($urandom_range(0, 5) != 0);
      begin
        automatic int t0 = $urandom_range(0, N_INPUT - 1);
        automatic bit sig = $urandom_range(0, 1);
        for (int i = 0; i < N_INPUT; i++) begin
          automatic int x = $urandom_range(0, 12);
          if (sig && i >= t0 && i < t0 + 6) x += $urandom_range(5, 30);
          if (x > 127) x = 127;
          hits[i] = hit_t'(x);
          v.h[i] = longint'(x);
        end
      end
      in_valid = v.valid;
      if (v.valid)
        for (int n = 0; n < N_HIDDEN; n++) begin
          automatic longint pre = field(P, hidden_idx(n, N_INPUT));
          for (int i = 0; i < N_INPUT; i++) pre += field(P, hidden_idx(n, i)) * v.h[i];
          if (pre < 0) n_clip++;
        end
      hist.push_back(v);
    end
    $display("decisions: accept=%0d reject=%0d, hidden ReLU clips=%0d", n_accept, n_reject, n_clip);
    checks += 3;
    if (n_accept == 0) begin failures++; $display("no event accepted"); end
    if (n_reject == 0) begin failures++; $display("no event rejected"); end
    if (n_clip == 0)   begin failures++; $display("ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
