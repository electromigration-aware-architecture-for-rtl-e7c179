// tb_rotate_trigger: self-checking test of the rotation pulse generator.
//
// A PERIOD = 7 instance counts a random access strobe; the test predicts each
// pulse (one cycle after the 7th counted event) and checks every cycle. External
// events must pulse at once and restart the count; enable = 0 must silence
// both sources. A default-size instance is checked for no early pulse.
module tb_rotate_trigger;
  logic clk = 0, rst_n = 0;
  logic enable, count_en, ext_event, trigger, trigger_full;
  int checks = 0, failures = 0;

  rotate_trigger #(.PERIOD(7)) dut (.clk, .rst_n, .enable, .count_en, .ext_event, .trigger);
  rotate_trigger dut_full (.clk, .rst_n, .enable, .count_en(1'b1), .ext_event(1'b0), .trigger(trigger_full));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int cnt, pulses, exp_next, ext_pulses;
    bit exp_trig;
    enable = 1; count_en = 0; ext_event = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    cnt = 0; exp_trig = 0; pulses = 0; ext_pulses = 0;
    for (int c = 0; c < 5000; c++) begin
      count_en  = ($urandom_range(0, 2) != 0);
      ext_event = ($urandom_range(0, 99) == 0);
      enable    = !(c >= 4000 && c < 4500);
      @(posedge clk); #1;
      exp_next = 0;
      if (!enable) cnt = 0;
      else if (ext_event) begin exp_next = 1; cnt = 0; ext_pulses++; end
      else if (count_en) begin
        if (cnt == 6) begin exp_next = 1; cnt = 0; end else cnt++;
      end
      check(trigger == exp_next[0], $sformatf("trigger cycle %0d", c));
      if (trigger) pulses++;
      check(!trigger_full, "default period no early pulse");
    end
    check(pulses > ext_pulses + 100, $sformatf("periodic pulses seen %0d", pulses - ext_pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
