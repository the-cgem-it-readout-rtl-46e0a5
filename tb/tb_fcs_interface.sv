// tb_fcs_interface: L1 pulses 32 clocks long (8 BESIII clocks) are numbered
// and time-stamped; the stamp must equal the local time (as seen when the
// line is driven high between clock edges) plus 2, the synchroniser delay. Checks the Full
// output at 6 queued triggers, the loss of a trigger with a full queue, and
// the Check rule (no error after 256 triggers, an error otherwise).
`timescale 1ns/1ps
module tb_fcs_interface;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [15:0] now, trig_ts;
  logic        l1, ck, trig_valid, trig_pop, trig_lost, check_error, full_out;
  logic [23:0] trig_num, trig_count;
  int          nlost = 0, ncherr = 0;
  logic [15:0] exp_ts [$];

  fcs_interface dut (.clk, .rst_n, .now, .l1_in(l1), .check_in(ck), .trig_valid, .trig_num,
    .trig_ts, .trig_pop, .trig_lost, .check_error, .full_out, .trig_count);

  always @(posedge clk) begin
    if (!rst_n) now <= 16'd100; else now <= now + 16'd1;
    if (rst_n && trig_lost) nlost++;
    if (rst_n && check_error) ncherr++;
  end

  task automatic pulse_l1();
    @(negedge clk);
    l1 = 1'b1;
    exp_ts.push_back(now + 16'd2);
    repeat (32) @(negedge clk);
    l1 = 1'b0;
    repeat (8) @(negedge clk);
  endtask

  task automatic pop_check(input int num);
    check(trig_valid, "trigger queued");
    check(trig_num == 24'(num), $sformatf("trigger number %0d (%0d)", num, trig_num));
    begin logic [15:0] e; e = exp_ts.pop_front(); check(trig_ts == e, $sformatf("time-of-arrival stamp %0d exp %0d", trig_ts, e)); end
    @(negedge clk) trig_pop = 1'b1;
    @(negedge clk) trig_pop = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    l1 = 0; ck = 0; trig_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(!trig_valid && !full_out, "idle after reset");
    for (int i = 0; i < 5; i++) pulse_l1();
    check(!full_out, "5 triggers: not full");
    pulse_l1();
    check(full_out, "6 triggers: Full raised");
    pulse_l1(); pulse_l1();
    check(nlost == 0, "8 triggers fit");
    pulse_l1();
    check(nlost == 1, "9th trigger lost with a full queue");
    void'(exp_ts.pop_back());
    for (int i = 0; i < 8; i++) pop_check(i);
    check(!full_out && !trig_valid, "queue drained");
    // a Check after 9 triggers is an error
    @(negedge clk) ck = 1;
    repeat (32) @(negedge clk);
    ck = 0;
    repeat (4) @(negedge clk);
    check(ncherr == 1, "Check after 9 triggers flagged");
    // up to 256 triggers: Check must then be accepted
    for (int i = 9; i < 256; i++) begin
      pulse_l1();
      pop_check(i);
    end
    check(trig_count == 24'd256, "256 triggers counted");
    @(negedge clk) ck = 1;
    repeat (32) @(negedge clk);
    ck = 0;
    repeat (4) @(negedge clk);
    check(ncherr == 1, "Check after 256 triggers accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
