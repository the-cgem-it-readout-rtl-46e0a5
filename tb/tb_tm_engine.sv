// tb_tm_engine: two FEBs with real latency buffers. Random hits (some inside,
// some outside the trigger window, some on a disabled third FEB slot) are
// written, then triggers are queued. The expected packet is computed by the
// test bench from its own hit list: header, every enabled-FEB hit whose
// timestamp lies in [arrival - latency, arrival - latency + window), in the
// order page / FEB / location, and a trailer with the hit count. Also checks
// that no packet starts before the programmable delay has elapsed.
`timescale 1ns/1ps
module tb_tm_engine;
  import cgem_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NF = 3;
  logic [15:0] now;
  logic [NF-1:0] wr_valid, ovf;
  logic [63:0] wr_word [NF];
  logic [3:0]  lb_page;
  logic [4:0]  lb_idx;
  logic [63:0] lb_data [NF];
  logic [5:0]  lb_fill [NF];
  logic        trig_valid, trig_pop, out_valid, out_last, out_ready, busy;
  logic [23:0] trig_num;
  logic [15:0] trig_ts;
  logic [63:0] out_data;
  logic [NF-1:0] feb_en;

  localparam logic [15:0] LAT = 16'd1433, WIN = 16'd267, DLY = 16'd200;

  for (genvar f = 0; f < NF; f++) begin : g_lb
    latency_buffer u_lb (.clk, .rst_n, .now, .wr_valid(wr_valid[f]), .wr_word(wr_word[f]),
      .overflow(ovf[f]), .rd_page(lb_page), .rd_idx(lb_idx), .rd_data(lb_data[f]),
      .page_fill(lb_fill[f]));
  end

  tm_engine #(.N_FEB(NF)) dut (.clk, .rst_n, .enable(1'b1), .now, .gemroc_id(5'd7),
    .feb_enable(feb_en), .l1_latency(LAT), .win_len(WIN), .proc_delay(DLY),
    .trig_valid, .trig_num, .trig_ts, .trig_pop, .lb_page, .lb_idx, .lb_data, .lb_fill,
    .ev_lb_overflow(1'b0), .ev_link_error(1'b0), .ev_check_error(1'b0), .ev_trig_lost(1'b0),
    .out_valid, .out_data, .out_last, .out_ready, .busy);

  always @(posedge clk) begin
    if (!rst_n) now <= 16'd0; else now <= now + 16'd1;
    out_ready <= ($urandom_range(0, 4) != 0);
  end

  // hits stored per FEB, in write order
  logic [63:0] stored [NF][$];
  logic [63:0] got [$];
  int          t_first_out;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (got.size() == 0) t_first_out = int'(now);
    got.push_back(out_data);
  end

  function automatic logic [63:0] hit(input logic [15:0] ts, input int f);
    tiger_word_t w;
    w = '0;
    w.wtype = TW_HIT;
    w.tiger_id = 3'(2 * f);
    w.hit.channel = 6'($urandom);
    w.hit.tcoarse = ts;
    w.hit.efine = 10'($urandom);
    return 64'(w);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] ws, tarr;
    logic [63:0] exp [$];
    int nin;
    wr_valid = '0; trig_valid = 0; trig_num = '0; trig_ts = '0;
    for (int f = 0; f < NF; f++) wr_word[f] = '0;
    feb_en = 3'b011;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      // event happens at time ev; hits around it are written as they "arrive"
      logic [15:0] ev;
      @(negedge clk);
      ev = now - 16'd420;  // all hits lie in the past when written
      for (int f = 0; f < NF; f++) stored[f].delete();
      // write 40 hits spread over [ev-150, ev+400) into each FEB
      for (int i = 0; i < 40; i++) begin
        @(negedge clk);
        wr_valid = '0;
        for (int f = 0; f < NF; f++) begin
          logic [15:0] ts;
          ts = ev - 16'd150 + 16'($urandom_range(0, 549));
          // the first four hits sit on the window edges
          case (i)
            0: ts = ev - 16'd1;
            1: ts = ev;
            2: ts = ev + WIN - 16'd1;
            3: ts = ev + WIN;
            default: ;
          endcase
          wr_word[f]  = hit(ts, f);
          wr_valid[f] = 1'b1;
          stored[f].push_back(wr_word[f]);
        end
      end
      @(negedge clk) wr_valid = '0;
      // the L1 trigger arrives LAT clocks after the event
      while (now != ev + LAT) @(negedge clk);
      tarr = now;
      ws   = tarr - LAT;
      trig_valid = 1; trig_num = 24'(100 + trial); trig_ts = tarr;
      // expected packet
      exp.delete();
      exp.push_back(tm_header(5'd7, trig_num, tarr));
      nin = 0;
      for (int pg = 0; pg < 16; pg++) begin
        logic [3:0] p;
        p = ws[11:8] + 4'(pg);
        if (pg > int'(((ws + WIN - 16'd1) >> 8) - (ws >> 8)) % 16) break;
        for (int f = 0; f < NF; f++) begin
          if (!feb_en[f]) continue;
          foreach (stored[f][k]) begin
            tiger_word_t w;
            w = tiger_word_t'(stored[f][k]);
            if (w.hit.tcoarse[11:8] == p && 16'(w.hit.tcoarse - ws) < WIN) begin
              exp.push_back(stored[f][k]);
              nin++;
            end
          end
        end
      end
      exp.push_back(tm_trailer(5'd7, trig_num, 12'(nin), '0));
      got.delete();
      while (!(trig_pop)) @(negedge clk);
      @(negedge clk) trig_valid = 0;
      repeat (3) @(negedge clk);
      check(got.size() == exp.size(), $sformatf("trial %0d: %0d words (exp %0d)", trial, got.size(), exp.size()));
      for (int i = 0; i < exp.size() && i < got.size(); i++)
        check(got[i] == exp[i], $sformatf("trial %0d word %0d %h exp %h", trial, i, got[i], exp[i]));
      check(16'(t_first_out) - tarr >= DLY, "packet starts after the programmable delay");
      check(nin > 5, $sformatf("hits matched (%0d)", nin));
      // wait so that the next trial uses other pages
      repeat (300) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
