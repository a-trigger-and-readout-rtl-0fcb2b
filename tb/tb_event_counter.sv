// tb_event_counter: drives random trigger pulses with random accept_ok and
// compares accepted, evnum and lost with a counting reference every cycle.
module tb_event_counter;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, trig = 0, accept_ok = 0;
  logic accepted;
  logic [31:0] evnum, lost;
  int checks = 0, failures = 0;
  int exp_num = 0, exp_lost = 0, n_acc = 0, n_lost = 0;

  always #5 clk = ~clk;

  event_counter dut (.clk, .rst_n, .trig, .accept_ok, .accepted, .evnum, .lost);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      trig      = ($urandom_range(0, 2) == 0);
      accept_ok = ($urandom_range(0, 3) != 0);
      #1;
      check(accepted == (trig && accept_ok), "accepted");
      check(evnum == 32'(exp_num), $sformatf("evnum %0d exp %0d", evnum, exp_num));
      check(lost == 32'(exp_lost), "lost");
      if (trig) begin
        if (accept_ok) n_acc++; else begin exp_lost++; n_lost++; end
        exp_num++;
      end
    end
    check(n_acc > 10 && n_lost > 10, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
