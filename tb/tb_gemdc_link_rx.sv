// tb_gemdc_link_rx: the test bench encodes packets (K27.7, 8 bytes per word,
// fillers, K29.7) with the 8b/10b tables and checks that the port returns the
// words in order with out_last on the final word of each packet, and that an
// invalid symbol is reported.
`timescale 1ns/1ps
module tb_gemdc_link_rx;
  import code8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        sym_valid, out_valid, out_last, err;
  logic [9:0]  sym;
  logic [63:0] out_data;
  gemdc_link_rx dut (.clk, .rst_n, .sym_valid, .sym, .out_valid, .out_data, .out_last, .err);

  logic [63:0] exp_w [$];
  bit          exp_l [$];
  int          nerr = 0, nlast = 0;
  logic        rd = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      logic [63:0] e;
      bit el;
      e = exp_w.pop_front(); el = exp_l.pop_front();
      check(out_data == e && out_last == el, $sformatf("word %h/%0d exp %h/%0d", out_data, out_last, e, el));
      if (out_last) nlast++;
    end
    if (err) nerr++;
  end

  task automatic send(input logic [7:0] b, input bit k);
    enc_t e;
    e = enc8b10b(b, k, rd);
    rd = e.rd;
    @(negedge clk);
    sym_valid = 1; sym = e.sym;
    @(negedge clk);
    sym_valid = 0;
    if ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_valid = 0; sym = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) send(K28_5, 1);
    for (int p = 0; p < 15; p++) begin
      int n;
      n = $urandom_range(1, 8);
      send(K27_7, 1);
      for (int i = 0; i < n; i++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};
        exp_w.push_back(w); exp_l.push_back(i == n - 1);
        for (int b = 7; b >= 0; b--) begin
          send(w[8*b +: 8], 0);
          if ($urandom_range(0, 9) == 0) send(K28_5, 1);
        end
      end
      send(K29_7, 1);
      repeat ($urandom_range(0, 3)) send(K28_5, 1);
    end
    repeat (5) @(negedge clk);
    check(exp_w.size() == 0, "all words received");
    check(nlast == 15, "15 packet ends");
    check(nerr == 0, "no error on a clean line");
    // invalid symbol
    @(negedge clk) sym_valid = 1; sym = 10'b0000000000;
    @(negedge clk) sym_valid = 0;
    repeat (3) @(negedge clk);
    check(nerr == 1, "invalid symbol reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
