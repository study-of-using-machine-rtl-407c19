// tb_l1_trigger_top -- end-to-end test of the trigger with a random 6-bit
// weight set. It loads 500 events (dark noise, some with a signal pulse)
// through the write port, then:
//   1. runs them with enable: 500 back-to-back decisions, first one 16
//      clocks after the edge that sees enable, every one checked against the
//      reference model;
//   2. holds enable high after the run: no second run may start;
//   3. aborts a run by dropping enable, then reruns from event 0;
//   4. switches to the live stream and checks one decision per new sample
//      once 20 samples have been collected.
// It counts how often each mechanism happened (full run, aborted run,
// accept, reject, ReLU clipping, live decision) and fails if one never did.
module tb_l1_trigger_top;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam params_t P = random_params(32'd32);
  localparam int unsigned NEV = DEFAULT_N_EVENTS;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, live_mode = 1'b0;
  logic nhit_valid = 1'b0, wr_en = 1'b0;
  hit_t nhit = '0;
  logic [8:0] wr_addr = '0;
  logic [W_EVENT-1:0] wr_data = '0;
  logic l1_accept, l1_valid, run_busy;
  hid_t hidden_probe [N_HIDDEN];
  out_t output_probe [N_OUTPUT];

  l1_trigger_top #(.PARAMS(P)) dut (.*);

  typedef longint vec_t [N_INPUT];
  vec_t events [NEV];
  bit   exp_q [$];
  int checks = 0, failures = 0;
  int n_accept = 0, n_reject = 0, n_clip = 0, n_full = 0, n_abort = 0, n_live = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Compares every decision with the next expected one.
  always @(negedge clk) begin
    if (rst_n && l1_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected decision at cycle %0d", cyc);
      end else begin
        if (l1_accept !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("cycle %0d: accept=%0b exp=%0b", cyc, l1_accept, exp_q[0]);
        end
        if (exp_q[0]) n_accept++; else n_reject++;
        void'(exp_q.pop_front());
      end
    end else if (rst_n && l1_accept) begin
      checks++; failures++;
      $display("accept without valid at cycle %0d", cyc);
    end
  end

  function automatic int clips(vec_t h);
    int c = 0;
    for (int n = 0; n < N_HIDDEN; n++) begin
      longint pre = field(P, hidden_idx(n, N_INPUT));
      for (int i = 0; i < N_INPUT; i++) pre += field(P, hidden_idx(n, i)) * h[i];
      if (pre < 0) c++;
    end
    return c;
  endfunction

  task automatic wait_drain();
    repeat (MLP_LATENCY + 4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d decisions missing", exp_q.size());
      exp_q.delete();
    end
  endtask

  // Raises enable for `cycles` clocks; expects `n_exp` decisions from event 0.
  task automatic run(int cycles, int n_exp, bit check_latency);
    longint t0;
    for (int e = 0; e < n_exp; e++) exp_q.push_back(ref_accept(P, events[e]));
    @(negedge clk);
    enable = 1'b1;
    @(posedge clk);
    t0 = cyc + 1;        // counter value once the edge that sees enable has updated it
    fork
      begin
        repeat (cycles - 1) @(negedge clk);
        @(negedge clk) enable = 1'b0;
      end
      if (check_latency) begin
        @(negedge clk iff l1_valid);
        checks++;
        if (cyc - t0 != MLP_LATENCY) begin
          failures++;
          $display("latency %0d cycles, expected %0d", cyc - t0, MLP_LATENCY);
        end else
          $display("latency from enable to first decision: %0d cycles", cyc - t0);
      end
    join
    wait_drain();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Load the events.
    for (int e = 0; e < NEV; e++) begin
      automatic int t0 = $urandom_range(0, N_INPUT - 1);
      automatic bit sig = (e % 2 == 1);
      @(negedge clk);
      for (int i = 0; i < N_INPUT; i++) begin
        automatic int x = $urandom_range(0, 12);
        if (sig && i >= t0 && i < t0 + 6) x += $urandom_range(5, 30);
        if (x > 127) x = 127;
        events[e][i] = x;
        wr_data[W_HIT*i +: W_HIT] = W_HIT'(x);
      end
      wr_en = 1'b1; wr_addr = 9'(e);
      n_clip += clips(events[e]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    checks++;
    if (l1_valid) begin failures++; $display("decision before enable"); end

    run(NEV + 100, NEV, 1'b1);  n_full++;   // 1 and 2
    run(123, 123, 1'b1);        n_abort++;  // 3: aborted
    run(NEV, NEV, 1'b0);        n_full++;   //    rerun from event 0

    // 4. live stream: 300 samples with gaps.
    @(negedge clk);
    live_mode = 1'b1;
    begin
      longint win [$];
      for (int k = 0; k < 400; k++) begin
        @(negedge clk);
        nhit_valid = ($urandom_range(0, 3) != 0);
        nhit = hit_t'($urandom_range(0, 40));
        if (nhit_valid) begin
          win.push_back(longint'(nhit));
          if (win.size() > N_INPUT) void'(win.pop_front());
          if (win.size() == N_INPUT) begin
            vec_t h;
            for (int i = 0; i < N_INPUT; i++) h[i] = win[i];
            exp_q.push_back(ref_accept(P, h));
            n_clip += clips(h);
            n_live++;
          end
        end
      end
      @(negedge clk);
      nhit_valid = 1'b0;
      wait_drain();
    end

    $display("full runs=%0d aborted runs=%0d accepts=%0d rejects=%0d relu clips=%0d live decisions=%0d",
             n_full, n_abort, n_accept, n_reject, n_clip, n_live);
    checks += 6;
    if (n_full == 0)   begin failures++; $display("no full run"); end
    if (n_abort == 0)  begin failures++; $display("no aborted run"); end
    if (n_accept == 0) begin failures++; $display("no accept"); end
    if (n_reject == 0) begin failures++; $display("no reject"); end
    if (n_clip == 0)   begin failures++; $display("no ReLU clipping"); end
    if (n_live == 0)   begin failures++; $display("no live decision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
