// tb_l1_trigger_full -- one complete operation of the trigger exactly as
// built, every parameter at its default: load 500 events (250 dark-noise
// windows of 100..240 hits and 250 with a 120-hit signal pulse added), raise
// enable once, and check the 500 decisions against the reference model
// using the default parameter constant, the 16-cycle latency from enable to
// the first decision, and that the 500 decisions come on 500 consecutive
// clocks.
module tb_l1_trigger_full;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int unsigned NEV = DEFAULT_N_EVENTS;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, live_mode = 1'b0;
  logic nhit_valid = 1'b0, wr_en = 1'b0;
  hit_t nhit = '0;
  logic [8:0] wr_addr = '0;
  logic [W_EVENT-1:0] wr_data = '0;
  logic l1_accept, l1_valid, run_busy;
  hid_t hidden_probe [N_HIDDEN];
  out_t output_probe [N_OUTPUT];

  l1_trigger_top dut (.*);

  typedef longint vec_t [N_INPUT];
  vec_t events [NEV];
  bit   is_signal [NEV];
  int checks = 0, failures = 0;
  int n_dec = 0, sig_acc = 0, noise_acc = 0;
  longint cyc = 0, t_en = 0, t_first = -1, t_last = -1;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && l1_valid) begin
      bit e;
      checks++;
      if (n_dec >= NEV) begin
        failures++;
        $display("more than %0d decisions", NEV);
      end else begin
        e = ref_accept(DEFAULT_PARAMS, events[n_dec]);
        if (l1_accept !== e) begin
          failures++;
          if (failures < 10) $display("event %0d: accept=%0b exp=%0b", n_dec, l1_accept, e);
        end
        if (l1_accept) begin
          if (is_signal[n_dec]) sig_acc++; else noise_acc++;
        end
      end
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
      n_dec++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < NEV; e++) begin
      automatic int total = $urandom_range(100, 240);
      @(negedge clk);
      for (int i = 0; i < N_INPUT; i++) events[e][i] = 0;
      for (int n = 0; n < total; n++) begin   // dark hits, uniform in time
        automatic int i = $urandom_range(0, N_INPUT - 1);
        events[e][i]++;
      end
      is_signal[e] = (e % 2 == 1);
      if (is_signal[e]) begin                  // 120-hit pulse, 6 clocks
        automatic int t0 = $urandom_range(0, N_INPUT - 6);
        for (int i = 0; i < 6; i++) events[e][t0 + i] += 20;
      end
      for (int i = 0; i < N_INPUT; i++)
        wr_data[W_HIT*i +: W_HIT] = W_HIT'(events[e][i]);
      wr_en = 1'b1; wr_addr = 9'(e);
    end
    @(negedge clk);
    wr_en = 1'b0;
    repeat (5) @(negedge clk);
    enable = 1'b1;
    @(posedge clk);
    t_en = cyc + 1;
    repeat (NEV + 60) @(negedge clk);
    enable = 1'b0;
    repeat (5) @(negedge clk);

    checks += 3;
    if (n_dec != NEV) begin failures++; $display("%0d decisions, expected %0d", n_dec, NEV); end
    if (t_first - t_en != MLP_LATENCY) begin
      failures++; $display("latency %0d, expected %0d", t_first - t_en, MLP_LATENCY);
    end
    if (t_last - t_first != NEV - 1) begin
      failures++; $display("decisions spread over %0d clocks", t_last - t_first + 1);
    end
    $display("latency %0d clocks; %0d decisions; accepted signal %0d/%0d, dark noise %0d/%0d",
             t_first - t_en, n_dec, sig_acc, NEV / 2, noise_acc, NEV / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
