// tb_trigger_decision -- checks the accept rule: signal strictly above
// noise, ties and invalid cycles rejected.
module tb_trigger_decision;
  localparam int unsigned W = 42;
  logic valid, accept;
  logic signed [W-1:0] y_noise, y_signal;
  int checks = 0, failures = 0;

  trigger_decision #(.W(W)) dut (.valid, .y_noise, .y_signal, .accept);

  task automatic check(bit v, longint n, longint s);
    bit e;
    valid = v; y_noise = W'(n); y_signal = W'(s);
    #1;
    e = v && (s > n);
    checks++;
    if (accept !== e) begin
      failures++;
      $display("mismatch valid=%0b noise=%0d signal=%0d accept=%0b exp=%0b", v, n, s, accept, e);
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
    check(1, 0, 0);
    check(1, 5, 6);
    check(1, 6, 5);
    check(1, -3, -2);
    check(1, -2, -3);
    check(1, -1, 1);
    check(0, 0, 100);
    check(1, 100, 100);
    for (int k = 0; k < 1000; k++) begin
      longint n, s;
      n = longint'($urandom) - 64'sd2147483648;
      s = (k % 4 == 0) ? n : longint'($urandom) - 64'sd2147483648;
      check((k % 10) != 0, n * 512, s * 512);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
