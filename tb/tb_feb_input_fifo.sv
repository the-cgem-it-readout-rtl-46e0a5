// tb_feb_input_fifo: four link streams with random arrival times and a random
// downstream ready. Checks that every word of an enabled link comes out once,
// in per-link order, that a disabled link is ignored, and that the FIFO
// reports drops when it is held full.
`timescale 1ns/1ps
module tb_feb_input_fifo;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [3:0]  in_valid, link_en;
  logic [63:0] in_word [4];
  logic        out_valid, out_ready, drop, afull;
  logic [63:0] out_word;

  feb_input_fifo #(.NLINK(4), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_word,
    .link_enable(link_en), .out_valid, .out_word, .out_ready, .drop, .almost_full(afull));

  logic [63:0] exp [4][$];
  int nout = 0, ndrop = 0;
  bit randready = 1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int l;
      l = int'(out_word[63:62]);
      nout++;
      if (exp[l].size() == 0) check(0, $sformatf("unexpected word %h", out_word));
      else begin logic [63:0] e; e = exp[l].pop_front(); check(out_word == e, $sformatf("link %0d order %h exp %h", l, out_word, e)); end
    end
    if (drop) ndrop++;
    out_ready <= randready ? ($urandom_range(0, 3) != 0) : 1'b0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq [4] = '{0, 0, 0, 0};
    in_valid = '0;
    link_en  = 4'b1011;   // link 2 disabled
    for (int i = 0; i < 4; i++) in_word[i] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // each link sends a word at most every 40 clocks
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      in_valid = '0;
      for (int l = 0; l < 4; l++)
        if ((t % 40) == (l * 7) && $urandom_range(0, 2) != 0) begin
          in_valid[l] = 1'b1;
          in_word[l]  = {2'(l), 30'd0, 16'(seq[l]++), 16'($urandom)};
          if (link_en[l]) exp[l].push_back(in_word[l]);
        end
      // all four at once now and then
      if (t % 400 == 390) begin
        for (int l = 0; l < 4; l++) begin
          in_valid[l] = 1'b1;
          in_word[l]  = {2'(l), 30'd0, 16'(seq[l]++), 16'($urandom)};
          if (link_en[l]) exp[l].push_back(in_word[l]);
        end
      end
    end
    @(negedge clk) in_valid = '0;
    repeat (200) @(posedge clk);
    check(exp[0].size() == 0 && exp[1].size() == 0 && exp[3].size() == 0, "all enabled words out");
    check(ndrop == 0, $sformatf("no drop at normal rate (%0d)", ndrop));
    check(nout > 300, $sformatf("enough traffic (%0d)", nout));
    // hold the output: FIFO fills, then words are dropped
    randready = 0;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      in_valid = 4'b0001;
      in_word[0] = {2'd0, 62'd1};
      if (t < 2) in_valid = 4'b0001; else in_valid = 4'b0011;
      in_word[1] = {2'd1, 62'd2};
      @(negedge clk) in_valid = '0;
    end
    repeat (5) @(posedge clk);
    check(ndrop > 0, "drop reported when full");
    check(afull, "almost_full when full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
