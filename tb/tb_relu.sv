// tb_relu -- checks max(0, x) on the boundary values and random values.
module tb_relu;
  localparam int unsigned W = 25;
  logic signed [W-1:0] din, dout;
  int checks = 0, failures = 0;

  relu #(.W(W)) dut (.din, .dout);

  task automatic check(logic signed [W-1:0] v);
    longint e;
    din = v;
    #1;
    e = (longint'(v) < 0) ? 0 : longint'(v);
    checks++;
    if (longint'(dout) != e) begin
      failures++;
      $display("mismatch din=%0d dout=%0d exp=%0d", din, dout, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0);
    check(1);
    check(-1);
    check({1'b1, {(W-1){1'b0}}});
    check({1'b0, {(W-1){1'b1}}});
    check({2'b10, {(W-2){1'b1}}});
    check({2'b01, {(W-2){1'b0}}});
    for (int k = 0; k < 1000; k++) check(W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
