// tb_latency_buffer: writes hits with known coarse timestamps and checks the
// bucket (page) they land in, the page fill counts, the read-back data, the
// drop of the 33rd hit of a page and the recycling of a page when the local
// time re-enters its 2^8-clock interval (full circle: 2^12 clocks).
`timescale 1ns/1ps
module tb_latency_buffer;
  import cgem_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [15:0] now;
  logic        wr_valid, overflow;
  logic [63:0] wr_word, rd_data;
  logic [3:0]  rd_page;
  logic [4:0]  rd_idx;
  logic [5:0]  fill;
  int          novf = 0;

  latency_buffer dut (.clk, .rst_n, .now, .wr_valid, .wr_word, .overflow,
    .rd_page, .rd_idx, .rd_data, .page_fill(fill));

  always @(posedge clk) begin
    if (!rst_n) now <= 16'd0; else now <= now + 16'd1;
    if (rst_n && overflow) novf++;
  end

  function automatic logic [63:0] hit(input logic [15:0] ts, input logic [5:0] ch);
    tiger_word_t w;
    w = '0;
    w.wtype = TW_HIT;
    w.tiger_id = 3'd1;
    w.hit.channel = ch;
    w.hit.tcoarse = ts;
    w.hit.efine = 10'($urandom);
    return 64'(w);
  endfunction

  task automatic write(input logic [63:0] w);
    @(negedge clk);
    wr_valid = 1'b1; wr_word = w;
    @(negedge clk);
    wr_valid = 1'b0;
  endtask

  task automatic read(input int p, input int i, output logic [63:0] d, output int f);
    @(negedge clk);
    rd_page = 4'(p); rd_idx = 5'(i);
    #1 f = int'(fill);
    @(posedge clk); #1 d = rd_data;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp3 [$];
    logic [63:0] d;
    int f;
    wr_valid = 0; wr_word = '0; rd_page = '0; rd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // wait until now is inside page 5, then write hits of pages 3 and 4
    while (now != 16'h0520) @(posedge clk);
    for (int i = 0; i < 10; i++) begin
      d = hit(16'h0300 + 16'(i * 20), 6'(i));
      exp3.push_back(d);
      write(d);
    end
    write(hit(16'h04FF, 6'd63));
    // a frame word is not stored
    write({TW_FRAME, 62'h123});
    read(3, 0, d, f);
    check(f == 10, $sformatf("page 3 holds 10 hits (%0d)", f));
    for (int i = 0; i < 10; i++) begin
      read(3, i, d, f);
      check(d == exp3[i], $sformatf("page 3 location %0d", i));
    end
    read(4, 0, d, f);
    check(f == 1 && d[53:48] == 6'd63 && d[45:30] == 16'h04FF, "page 4 holds the 0x4FF hit");
    read(5, 0, d, f);
    check(f == 0, "frame word not stored");
    // fill page 6 beyond 32 locations
    for (int i = 0; i < 34; i++) write(hit(16'h0600 + 16'(i), 6'(i)));
    read(6, 31, d, f);
    check(f == 32, "page 6 full at 32");
    check(d[45:30] == 16'h061F, "last stored hit of page 6");
    check(novf == 2, $sformatf("two hits dropped (%0d)", novf));
    // page 3 is recycled when now re-enters 0x?3xx (after the 4096-clock circle)
    while (now != 16'h1302) @(posedge clk);
    read(3, 0, d, f);
    check(f == 0, "page 3 recycled after address rollover");
    read(4, 0, d, f);
    check(f == 1, "page 4 not yet recycled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
