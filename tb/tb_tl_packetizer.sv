// tb_tl_packetizer: trigger-less packets. A burst of 400 words must leave as
// packets of exactly 180 data words (the word limit); a trickle of words must
// leave in packets closed after 8 TIGER frames (frames shortened to 2^9
// clocks here). Every word must come out once, in per-input order, framed by
// header and trailer words carrying consecutive packet numbers and the word
// count.
`timescale 1ns/1ps
module tb_tl_packetizer;
  import cgem_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int FW = 9;
  logic [15:0] now;
  logic [3:0]  in_valid, in_ready;
  logic [63:0] in_word [4];
  logic        out_valid, out_last, out_ready, enable;
  logic [63:0] out_data;
  logic [31:0] pkt_count;

  tl_packetizer #(.N_IN(4), .MAX_WORDS(180), .FRAME_W(FW), .FRAMES_PKT(8)) dut (
    .clk, .rst_n, .enable, .now, .gemroc_id(5'd3), .in_valid, .in_word, .in_ready,
    .out_valid, .out_data, .out_last, .out_ready, .pkt_count);

  // sources: per-input queues
  logic [63:0] src [4][$];
  logic [63:0] exp [4][$];
  always @(negedge clk) for (int i = 0; i < 4; i++) begin
    in_valid[i] = src[i].size() > 0;
    in_word[i]  = (src[i].size() > 0) ? src[i][0] : '0;
  end

  // packet checker
  int  pkt_words, npkt = 0, n_by_words = 0, n_by_frames = 0, ntotal = 0;
  bit  in_pkt = 0;
  int  t_open;
  logic [31:0] exp_pnum = 0;
  always @(posedge clk) begin
    if (!rst_n) now <= '0; else now <= now + 16'd1;
    if (rst_n) begin
      for (int i = 0; i < 4; i++) if (in_valid[i] && in_ready[i]) void'(src[i].pop_front());
      if (out_valid && out_ready) begin
        if (!in_pkt) begin
          check(out_data[63:60] == K_TL_HEADER && out_data[31:0] == exp_pnum, "TL header");
          in_pkt = 1; pkt_words = 0; t_open = int'(now);
        end else if (out_last) begin
          check(out_data[63:60] == K_TL_TRAILER, "TL trailer");
          check(int'(out_data[47:32]) == pkt_words, "trailer word count");
          check(pkt_words <= 180, "at most 180 words");
          if (pkt_words == 180) n_by_words++;
          else begin
            n_by_frames++;
            check(int'(now) - t_open >= 7 * (1 << FW) && int'(now) - t_open <= 9 * (1 << FW) + 4,
                  $sformatf("closed after 8 frames (%0d clocks)", int'(now) - t_open));
          end
          in_pkt = 0; npkt++; exp_pnum++;
        end else begin
          int s;
          s = int'(out_data[9:8]);
          pkt_words++; ntotal++;
          if (exp[s].size() == 0) check(0, "unexpected word");
          else check(out_data == exp[s].pop_front(), "word order");
        end
      end
    end
    out_ready <= ($urandom_range(0, 5) != 0);
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq = 0;
    enable = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) enable = 1;
    // burst: 400 words
    for (int i = 0; i < 400; i++) begin
      logic [63:0] w;
      int s;
      s = i % 4;
      w = {TW_HIT, 52'(seq++), 2'(s), 8'h00};
      src[s].push_back(w); exp[s].push_back(w);
    end
    while (ntotal < 400) @(negedge clk);
    check(n_by_words >= 2, $sformatf("packets closed on 180 words (%0d)", n_by_words));
    // trickle: one word every 100 clocks for 40 frames
    for (int i = 0; i < 200; i++) begin
      logic [63:0] w;
      int s;
      repeat (100) @(negedge clk);
      s = $urandom_range(0, 3);
      w = {TW_FRAME, 52'(seq++), 2'(s), 8'h00};
      src[s].push_back(w); exp[s].push_back(w);
    end
    repeat (20 * (1 << FW)) @(negedge clk);
    check(ntotal == 600, $sformatf("all words delivered (%0d)", ntotal));
    check(n_by_frames >= 3, $sformatf("packets closed on 8 frames (%0d)", n_by_frames));
    check(pkt_count == exp_pnum, "packet counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
