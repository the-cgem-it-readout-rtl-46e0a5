// tb_tiger_link_rx: sends random TIGER words through the behavioural link
// model and checks that the receiver locks on the comma at both bit phases,
// returns every word unchanged (with its TIGER number inserted), delivers
// back-to-back words every 40 clocks (8 symbols x 5 clocks), and flags and
// drops a word hit by a line error.
`timescale 1ns/1ps
module tb_tiger_link_rx;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [1:0] ddr, ddr_slip;
  logic       prev_bit;
  tiger_tx_model u_tx (.clk, .rst_n, .ddr_bits(ddr));
  // Second receiver sees the line shifted by one bit (other DDR phase).
  always @(posedge clk) prev_bit <= ddr[0];
  assign ddr_slip = {prev_bit, ddr[1]};

  logic        lk0, lk1, v0, v1, e0, e1;
  logic [63:0] w0, w1;
  logic [15:0] ec0, ec1;
  tiger_link_rx #(.TIGER_ID(3'd5)) dut0 (.clk, .rst_n, .ddr_bits(ddr), .locked(lk0),
    .word_valid(v0), .word(w0), .err(e0), .err_count(ec0));
  tiger_link_rx #(.TIGER_ID(3'd2)) dut1 (.clk, .rst_n, .ddr_bits(ddr_slip), .locked(lk1),
    .word_valid(v1), .word(w1), .err(e1), .err_count(ec1));

  logic [63:0] exp0[$], exp1[$];
  int          last_t0 = -1, gaps_ok = 0, gaps = 0, cyc = 0;
  int          nrx0 = 0, nrx1 = 0, nerr0 = 0;

  always @(posedge clk) begin
    cyc++;
    if (v0 && rst_n) begin
      logic [63:0] e;
      nrx0++;
      e = exp0.pop_front();
      e[61:59] = 3'd5;
      check(w0 == e, $sformatf("rx0 word %h expected %h", w0, e));
      if (last_t0 >= 0 && cyc - last_t0 < 60) begin
        gaps++;
        if (cyc - last_t0 == 40) gaps_ok++;
      end
      last_t0 = cyc;
    end
    if (v1 && rst_n) begin
      logic [63:0] e;
      nrx1++;
      e = exp1.pop_front();
      e[61:59] = 3'd2;
      check(w1 == e, $sformatf("rx1 word %h expected %h", w1, e));
    end
    if (e0) nerr0++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    check(lk0 && lk1, "both receivers locked on the comma");
    // 30 back-to-back random words
    for (int i = 0; i < 30; i++) begin
      w = {$urandom, $urandom};
      u_tx.send_word(w);
      exp0.push_back(w);
      exp1.push_back(w);
    end
    while (u_tx.pending() != 0) @(posedge clk);
    repeat (60) @(posedge clk);
    check(exp0.size() == 0 && exp1.size() == 0, "all words received");
    check(gaps > 20 && gaps_ok == gaps, $sformatf("word spacing 40 clocks (%0d of %0d)", gaps_ok, gaps));
    // a corrupted symbol inside a word: error flagged, word dropped
    u_tx.send_k(8'hBC);
    u_tx.send_bad_word(64'h8123_4567_89AB_CDEF, 3);
    repeat (10) @(posedge clk);
    while (u_tx.pending() != 0) @(posedge clk);
    repeat (60) @(posedge clk);
    check(nerr0 >= 1 && ec0 >= 1, "line error detected");
    check(nrx0 == 30, "corrupted word dropped");
    // link keeps working afterwards
    for (int i = 0; i < 5; i++) begin
      w = {$urandom, $urandom};
      u_tx.send_word(w);
      exp0.push_back(w);
      exp1.push_back(w);
    end
    while (u_tx.pending() != 0) @(posedge clk);
    repeat (60) @(posedge clk);
    check(nrx0 == 35 && exp0.size() == 0 && exp1.size() == 0, "words after the error received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
