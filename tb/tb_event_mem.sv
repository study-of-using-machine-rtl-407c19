// tb_event_mem -- fills all 500 entries with random 160-bit events, then
// reads them back in random order and checks data and the 1-cycle read
// latency; also checks that rd_data holds while rd_en is low.
module tb_event_mem;
  localparam int unsigned DEPTH = 500, WIDTH = 160, W_ADDR = 9;
  logic clk = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [W_ADDR-1:0] wr_addr = '0, rd_addr = '0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  event_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = W_ADDR'(a);
      for (int j = 0; j < WIDTH / 32; j++) wr_data[32*j +: 32] = $urandom;
      model[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int k = 0; k < 2000; k++) begin
      int unsigned a;
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1'b1; rd_addr = W_ADDR'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        if (failures < 10) $display("read mismatch addr=%0d", a);
      end
      if (k % 100 == 0) begin   // hold check
        rd_en = 1'b0; rd_addr = W_ADDR'((a + 1) % DEPTH);
        @(negedge clk);
        checks++;
        if (rd_data !== model[a]) begin
          failures++;
          $display("rd_data did not hold at addr=%0d", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
