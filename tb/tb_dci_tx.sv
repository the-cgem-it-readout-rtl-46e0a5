// tb_dci_tx: random packets with random gaps and a symbol enable that is
// sometimes low. The symbol stream is decoded in the test bench: every symbol
// must be valid 8b/10b with correct running disparity, packets must appear as
// K27.7, the words' bytes MSB first, K29.7, and only K28.5 may appear between
// or inside packets as filler.
`timescale 1ns/1ps
module tb_dci_tx;
  import code8b10b_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        in_valid, in_last, in_ready, sym_en, in_packet;
  logic [63:0] in_data;
  logic [9:0]  sym;

  dci_tx dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .in_ready, .sym_en, .sym, .in_packet);

  logic [63:0] words [$];
  bit          lasts [$];
  // decoder state
  logic        rd = 0;
  bit          inp = 0, rd_sync = 0, sym_en_d = 0;
  int          nb = 0, npk_rx = 0, nbad = 0, nw_rx = 0;
  logic [63:0] acc;
  logic [63:0] exp_w [$];
  bit          exp_l [$];

  always @(posedge clk) begin
    sym_en_d <= sym_en;
    if (rst_n && sym_en_d) begin
      dec_t d;
      d = dec8b10b(sym, rd);
      if (!rd_sync) begin
        // the first symbol after reset is K28.5 RD-
        rd_sync = 1;
      end
      rd = d.rd;
      if (d.code_err || d.disp_err) nbad++;
      else if (d.k) begin
        if (d.data == K27_7) begin
          check(!inp, "SOP outside a packet");
          inp = 1; nb = 0;
        end else if (d.data == K29_7) begin
          check(inp && nb == 0, "EOP after whole words");
          inp = 0; npk_rx++;
        end else check(d.data == K28_5, "only K28.5 as filler");
      end else begin
        check(inp, "data only inside packets");
        acc = {acc[55:0], d.data};
        nb++;
        if (nb == 8) begin
          logic [63:0] e;
          bit el;
          nb = 0; nw_rx++;
          e = exp_w.pop_front(); el = exp_l.pop_front();
          check(acc == e, $sformatf("word %h exp %h", acc, e));
        end
      end
    end
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    void'(words.pop_front()); void'(lasts.pop_front());
  end
  always @(negedge clk) begin
    in_valid = words.size() > 0;
    in_data  = in_valid ? words[0] : '0;
    in_last  = in_valid ? lasts[0] : 1'b0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 20; p++) begin
      int n;
      n = $urandom_range(2, 12);
      for (int i = 0; i < n; i++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};
        words.push_back(w); lasts.push_back(i == n - 1);
        exp_w.push_back(w); exp_l.push_back(i == n - 1);
      end
      repeat ($urandom_range(0, 60)) @(negedge clk) sym_en = ($urandom_range(0, 3) != 0);
    end
    while (words.size() > 0) @(negedge clk) sym_en = ($urandom_range(0, 3) != 0);
    @(negedge clk) sym_en = 1;
    repeat (50) @(negedge clk);
    check(npk_rx == 20, $sformatf("20 packets framed (%0d)", npk_rx));
    check(exp_w.size() == 0, "all words sent");
    check(nbad == 0, "no 8b/10b errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
