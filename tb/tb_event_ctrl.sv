// tb_event_ctrl -- checks the replay sequencer: a full run reads addresses
// 0..499 on consecutive clocks starting on the edge that first sees enable,
// data_valid follows rd_en by one clock, no second run until enable has
// been low, and a run aborted by enable falling restarts from address 0.
module tb_event_ctrl;
  localparam int unsigned N_EVENTS = 500, W_ADDR = 9;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0;
  logic rd_en, data_valid, busy;
  logic [W_ADDR-1:0] rd_addr;
  int checks = 0, failures = 0;
  int reads = 0;
  bit rd_en_d = 1'b0;

  event_ctrl #(.N_EVENTS(N_EVENTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data_valid is rd_en one clock later.
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (data_valid !== rd_en_d) begin
        failures++;
        $display("data_valid mismatch at %0t", $time);
      end
    end
    rd_en_d <= rst_n && rd_en;
  end

  // Holds enable high for `cycles` clocks and checks the address sequence.
  task automatic run(int cycles, int exp_reads);
    int n = 0;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      enable = 1'b1;
      #1;
      if (rd_en) begin
        checks++;
        if (rd_addr !== W_ADDR'(n) || c != n) begin
          failures++;
          if (failures < 10) $display("cycle %0d: addr=%0d exp=%0d", c, rd_addr, n);
        end
        n++;
      end
    end
    @(negedge clk);
    enable = 1'b0;
    checks++;
    if (n != exp_reads) begin
      failures++;
      $display("run of %0d cycles read %0d events, expected %0d", cycles, n, exp_reads);
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    checks++;
    if (rd_en) begin failures++; $display("read while enable low"); end
    run(N_EVENTS + 200, N_EVENTS);   // full run, then idle with enable high
    run(N_EVENTS, N_EVENTS);         // exactly one run
    run(37, 37);                     // aborted run
    run(N_EVENTS + 5, N_EVENTS);     // restarts at address 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
