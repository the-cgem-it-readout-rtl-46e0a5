// tb_gemroc: one GEMROC with two FEBs (eight data links) fed by TIGER link
// models. The test bench
//  - lets the links lock on the idle commas;
//  - trigger-matched mode: sends hits with known coarse timestamps, some
//    inside and some outside the trigger window, then an L1 pulse timed so
//    that the window (l1_latency = 1433 clocks before the arrival stamp,
//    267 clocks long) covers the chosen hits; it checks the packet header,
//    the set of hits, the trailer count and status, that the same words
//    arrive on the optical link (decoded by a GEM-DC port receiver), and that
//    the packet does not start before the processing delay has passed;
//  - a corrupted link symbol and a Check pulse at a wrong trigger count must
//    show as link_error and check_error in the next trailer;
//  - trigger-less mode: all sent words come back in TL packets, a packet is
//    closed at 180 data words and one is closed after eight time frames;
//  - a configuration command is shifted out on the SPI-like link (looped
//    back) and the response returns the sent frame.
`timescale 1ns/1ps
module tb_gemroc;
  import cgem_pkg::*;
  localparam int NF = 2, NL = 4 * NF, FW = 10;
  localparam logic [15:0] LAT = 16'd1433, WIN = 16'd267, DLY = 16'd200;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [1:0]       link_ddr [NL];
  logic [NL-1:0]    link_locked;
  logic             l1_in = 0, check_in = 0, full_out, tl_mode = 0;
  logic [NF-1:0]    cfg_cmd_valid = 0, cfg_cmd_tiger = 0, cfg_cmd_ready, cfg_rsp_valid;
  logic [NF-1:0]    cfg_sclk, cfg_mosi;
  logic [31:0]      cfg_cmd_data [NF], cfg_rsp_data [NF];
  logic [1:0]       cfg_cs_n [NF];
  logic             udp_valid, udp_last, udp_ready;
  logic [63:0]      udp_data;
  logic [9:0]       opt_sym;
  logic [23:0]      trig_count;
  logic [31:0]      tl_pkt_count;
  logic [15:0]      now;

  gemroc #(.N_FEB(NF), .FRAME_W(FW)) dut (
    .clk, .rst_n, .gemroc_id(5'd9),
    .link_ddr, .link_locked, .l1_in, .check_in, .full_out,
    .tl_mode, .tiger_enable('1), .l1_latency(LAT), .win_len(WIN), .proc_delay(DLY),
    .cfg_cmd_valid, .cfg_cmd_tiger, .cfg_cmd_data, .cfg_cmd_ready, .cfg_rsp_valid,
    .cfg_rsp_data, .cfg_sclk, .cfg_mosi, .cfg_cs_n, .cfg_miso(cfg_mosi),
    .udp_valid, .udp_data, .udp_last, .udp_ready,
    .opt_sym_en(1'b1), .opt_sym, .trig_count, .tl_pkt_count, .now);

  // ---- TIGER link models, fed from per-link queues ------------------------
  logic [63:0] txq  [NL][$];
  bit          txbad[NL][$];
  for (genvar i = 0; i < NL; i++) begin : g_tx
    tiger_tx_model u (.clk, .rst_n, .ddr_bits(link_ddr[i]));
    always @(posedge clk) if (txq[i].size() > 0 && u.pending() < 16) begin
      if (txbad[i].pop_front()) u.send_bad_word(txq[i].pop_front(), 3);
      else                      u.send_word(txq[i].pop_front());
    end
  end

  function automatic logic [63:0] hit(input int link, input logic [15:0] ts);
    return {2'b10, 3'd0, 5'd0, 6'($urandom), 2'($urandom), ts, 30'($urandom)};
  endfunction
  // the word as the receiver stamps it: TIGER id = link / 2
  function automatic logic [63:0] stamped(input int link, input logic [63:0] w);
    return {w[63:62], 3'(link / 2), w[58:0]};
  endfunction
  task automatic push(input int link, input logic [63:0] w, input bit bad = 0);
    txq[link].push_back(w); txbad[link].push_back(bad);
  endtask

  // ---- output collection: UDP stream and optical link --------------------
  logic [63:0] udp_w [$];
  bit          udp_l [$];
  int          udp_pkts = 0;
  always @(negedge clk) udp_ready <= ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (rst_n && udp_valid && udp_ready) begin
    udp_w.push_back(udp_data); udp_l.push_back(udp_last);
    if (udp_last) udp_pkts++;
  end

  logic        ox_valid, ox_last, ox_err;
  logic [63:0] ox_data;
  gemdc_link_rx u_ox (.clk, .rst_n, .sym_valid(1'b1), .sym(opt_sym),
                      .out_valid(ox_valid), .out_data(ox_data), .out_last(ox_last), .err(ox_err));
  logic [63:0] opt_w [$];
  int          opt_err = 0, first_udp_cycle = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ox_valid) opt_w.push_back(ox_data);
    if (rst_n && ox_err) opt_err++;
    if (rst_n && udp_valid && first_udp_cycle < 0) first_udp_cycle = cyc;
  end

  task automatic fire_l1(output logic [15:0] ts);
    ts = now + 16'd2;
    l1_in = 1;
    repeat (32) @(negedge clk);
    l1_in = 0;
  endtask

  // pop one packet from the UDP capture
  task automatic get_packet(output logic [63:0] p [$]);
    int guard;
    bit done;
    guard = 0; done = 0;
    p.delete();
    while (!done && guard < 20000) begin
      if (udp_w.size() > 0) begin
        p.push_back(udp_w.pop_front());
        done = udp_l.pop_front();
      end else begin
        @(posedge clk);
        guard++;
      end
    end
    check(done, "packet received");
  endtask

  // one trigger-matched event: nin hits in the window, nout outside
  task automatic tm_event(input int nin, input int nout, input logic [23:0] tnum,
                          input bit bad_link, input logic [11:0] exp_st);
    logic [63:0] exp_hits [$], got_hits [$], p [$];
    logic [15:0] h0, ts;
    int          cstart;
    @(negedge clk);
    h0 = now - 16'd600;   // hits lie in the past, as real TIGER hits do
    for (int i = 0; i < nin; i++) begin
      int l;
      logic [63:0] w;
      l = $urandom_range(0, NL - 1);
      w = hit(l, h0 + 16'($urandom_range(0, 250)));
      push(l, w);
      exp_hits.push_back(stamped(l, w));
    end
    for (int i = 0; i < nout; i++) begin
      int l;
      l = $urandom_range(0, NL - 1);
      // before the window start or at/after its end
      push(l, hit(l, (i % 2) ? h0 - 16'($urandom_range(1, 300)) : h0 + WIN + 16'($urandom_range(0, 200))));
    end
    if (bad_link) push(0, hit(0, h0 - 16'd1000), 1);
    // arrival stamp = h0 + LAT: the window is [h0, h0 + WIN)
    while (now != h0 + LAT - 16'd2) @(negedge clk);
    cstart = cyc;
    first_udp_cycle = -1;
    fire_l1(ts);
    check(ts == h0 + LAT, "L1 stamp");
    get_packet(p);
    check(first_udp_cycle - cstart >= int'(DLY), $sformatf("packet starts after the processing delay (%0d)", first_udp_cycle - cstart));
    check(p[0] == tm_header(5'd9, tnum, ts), $sformatf("TM header %h", p[0]));
    check(p[p.size()-1] == tm_trailer(5'd9, tnum, 12'(nin), exp_st),
          $sformatf("TM trailer %h expected %h", p[p.size()-1], tm_trailer(5'd9, tnum, 12'(nin), exp_st)));
    for (int i = 1; i < p.size() - 1; i++) got_hits.push_back(p[i]);
    got_hits.sort(); exp_hits.sort();
    check(got_hits == exp_hits, $sformatf("trigger %0d: %0d hits, %0d expected", tnum, got_hits.size(), exp_hits.size()));
    // the same packet on the optical link
    repeat (400) @(negedge clk);
    check(opt_w.size() == p.size(), $sformatf("optical link carries the packet (%0d/%0d words)", opt_w.size(), p.size()));
    for (int i = 0; i < p.size() && opt_w.size() > 0; i++) check(opt_w.pop_front() == p[i], "optical word");
    opt_w.delete();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] p [$], sent [$], got [$];
    int n180, nframe;
    for (int f = 0; f < NF; f++) cfg_cmd_data[f] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) @(posedge clk);
    check(link_locked == '1, "all links locked on commas");
    // ---- trigger-matched mode ----
    repeat (1500) @(negedge clk);
    tm_event(12, 6, 24'd0, 0, 12'h000);
    tm_event(30, 10, 24'd1, 0, 12'h000);
    tm_event(0, 4, 24'd2, 0, 12'h000);
    tm_event(5, 0, 24'd3, 1, 12'h004);   // link error reported
    @(negedge clk) check_in = 1;          // 4 triggers so far: wrong count
    repeat (32) @(negedge clk) check_in = 0;
    tm_event(5, 2, 24'd4, 0, 12'h008);   // check error reported
    check(opt_err == 0, "no symbol error on the optical link");
    check(trig_count == 5, "trigger count");
    // ---- configuration link ----
    @(negedge clk);
    cfg_cmd_data[1] = 32'hA5C3_0F1E; cfg_cmd_tiger[1] = 1; cfg_cmd_valid[1] = 1;
    while (!cfg_cmd_ready[1]) @(negedge clk);
    @(negedge clk) cfg_cmd_valid[1] = 0;
    begin
      int t0;
      t0 = cyc;
      while (!cfg_rsp_valid[1] && cyc - t0 < 2000) @(negedge clk);
      check(cfg_rsp_valid[1], "configuration response");
      check(cfg_rsp_data[1] == 32'hA5C3_0F1E, $sformatf("looped-back frame %h", cfg_rsp_data[1]));
      check(cyc - t0 >= 32 * 18, "32 bits at 18 clocks per bit");
    end
    // ---- trigger-less mode ----
    udp_w.delete(); udp_l.delete();
    @(negedge clk) tl_mode = 1;
    for (int i = 0; i < 208; i++) begin
      int l;
      logic [63:0] w;
      l = i % NL;
      w = hit(l, 16'(i));
      push(l, w);
      sent.push_back(stamped(l, w));
    end
    // 208 words: one packet closed at 180 words, the rest by the frame count
    repeat (8 * (1 << FW) * 3) @(negedge clk);
    n180 = 0; nframe = 0;
    while (udp_w.size() > 0) begin
      get_packet(p);
      check(p[0][63:60] == K_TL_HEADER && p[p.size()-1][63:60] == K_TL_TRAILER, "TL header/trailer");
      check(p[p.size()-1][47:32] == 16'(p.size() - 2), "TL trailer word count");
      check(p.size() - 2 <= 180, "TL packet at most 180 words");
      if (p.size() - 2 == 180) n180++;
      else if (p.size() > 2) nframe++;
      for (int i = 1; i < p.size() - 1; i++) got.push_back(p[i]);
    end
    got.sort(); sent.sort();
    check(got == sent, $sformatf("TL: %0d words back, %0d sent", got.size(), sent.size()));
    check(n180 >= 1, "a TL packet closed at 180 words");
    check(nframe >= 1, "a TL packet closed by the frame count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
