// tb_cgem_readout_top: end-to-end test of the readout chain at reduced size:
// four GEMROCs (16 TIGER links each, driven by TIGER link models) and two
// GEM-DCs with two used input ports each, small event buffers and 2^10-clock
// TIGER frames. The VME side reads both event buffers; every event is split
// into its GEMROC packets, which are checked against the hits the test bench
// placed inside the trigger windows.
//
// Mechanisms made to happen, each counted (a count of zero is a failure):
//   tm_event        events built by both GEM-DCs with the expected hits
//   window_reject   hits outside the trigger window left out of the packets
//   lb_overflow     a latency-buffer page receiving more than 32 hits
//   link_error      a corrupted TIGER link symbol reported in the trailer
//   check_error     a Check pulse at a trigger count not a multiple of 256
//   roc_full        GEMROC trigger queue reaching its Full level
//   trig_lost       a trigger arriving at a full queue
//   dc_almost_full  a GEM-DC event buffer three quarters full
//   irq             VME interrupt raised and cleared by reading
//   tl_close_words  trigger-less packet closed at 180 data words
//   tl_close_frames trigger-less packet closed after eight time frames
//   mode_switch     switches TM -> TL -> TM with data in both modes
`timescale 1ns/1ps
module tb_cgem_readout_top;
  import cgem_pkg::*;
  localparam int NG = 4, ND = 2, NP = 4, GPD = 2, FW = 10;
  localparam logic [15:0] LAT = 16'd1433, WIN = 16'd267, DLY = 16'd200;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [1:0]       link_ddr [NG][16];
  logic [15:0]      link_locked [NG];
  logic             l1_in = 0, check_in = 0, full_out, tl_mode = 0;
  logic [7:0]       tiger_enable [NG];
  logic [15:0]      proc_delay = DLY;
  logic [3:0]       cfg_cmd_valid [NG], cfg_cmd_tiger [NG], cfg_cmd_ready [NG], cfg_rsp_valid [NG];
  logic [3:0]       cfg_sclk [NG], cfg_mosi [NG], cfg_miso [NG];
  logic [31:0]      cfg_cmd_data [NG][4], cfg_rsp_data [NG][4];
  logic [1:0]       cfg_cs_n [NG][4];
  logic [NG-1:0]    udp_valid, udp_last, udp_ready;
  logic [63:0]      udp_data [NG];
  logic [NP-1:0]    dc_port_enable [ND], dc_port_overflow [ND];
  logic [ND-1:0]    vme_rd_en, vme_rd_valid, vme_irq, dc_link_err;
  logic [63:0]      vme_rd_data [ND];
  logic [31:0]      dc_events_built [ND];
  logic [23:0]      trig_count [NG];
  logic [31:0]      tl_pkt_count [NG];

  cgem_readout_top #(.N_GEMROC(NG), .N_GEMDC(ND), .GEMDC_PORTS(NP), .GEMROC_PER_DC(GPD),
                     .PORT_DEPTH(64), .EVB_DEPTH(32), .FRAME_W(FW)) dut (
    .clk, .rst_n, .link_ddr, .link_locked, .l1_in, .check_in, .full_out,
    .tl_mode, .tiger_enable, .l1_latency(LAT), .win_len(WIN), .proc_delay,
    .cfg_cmd_valid, .cfg_cmd_tiger, .cfg_cmd_data, .cfg_cmd_ready, .cfg_rsp_valid,
    .cfg_rsp_data, .cfg_sclk, .cfg_mosi, .cfg_cs_n, .cfg_miso,
    .udp_valid, .udp_data, .udp_last, .udp_ready,
    .dc_port_enable, .vme_rd_en, .vme_rd_valid, .vme_rd_data, .vme_irq,
    .dc_events_built, .dc_port_overflow, .dc_link_err, .trig_count, .tl_pkt_count);

  // local copy of the GEMROC coarse-time counter (same reset, same clock)
  logic [15:0] tnow;
  always @(posedge clk or negedge rst_n) tnow <= !rst_n ? 16'd0 : tnow + 16'd1;

  // ---- TIGER link models ----------------------------------------------------
  logic [63:0] txq  [NG*16][$];
  bit          txbad[NG*16][$];
  for (genvar g = 0; g < NG; g++) begin : g_g
    for (genvar l = 0; l < 16; l++) begin : g_l
      tiger_tx_model u (.clk, .rst_n, .ddr_bits(link_ddr[g][l]));
      always @(posedge clk) if (txq[16*g+l].size() > 0 && u.pending() < 16) begin
        if (txbad[16*g+l].pop_front()) u.send_bad_word(txq[16*g+l].pop_front(), 2);
        else                           u.send_word(txq[16*g+l].pop_front());
      end
    end
  end
  function automatic logic [63:0] hit(input logic [15:0] ts);
    return {2'b10, 3'd0, 5'd0, 6'($urandom), 2'($urandom), ts, 30'($urandom)};
  endfunction
  function automatic logic [63:0] stamped(input int l, input logic [63:0] w);
    return {w[63:62], 3'(l / 2), w[58:0]};
  endfunction
  task automatic push(input int g, input int l, input logic [63:0] w, input bit bad = 0);
    txq[16*g+l].push_back(w); txbad[16*g+l].push_back(bad);
  endtask

  // ---- mechanism counters ---------------------------------------------------
  int n_tm = 0, n_rej = 0, n_ovf = 0, n_lerr = 0, n_cerr = 0, n_full = 0, n_lost = 0;
  int n_afull = 0, n_irq = 0, n_180 = 0, n_frames = 0, n_switch = 0;
  always @(posedge clk) if (rst_n) begin
    if (full_out) n_full++;
    if (dut.dc_afull != '0) n_afull++;
  end

  // ---- VME readout and event parsing ----------------------------------------
  bit          vme_on = 1;
  logic [63:0] ev_w [ND][$];
  logic [63:0] got_h [int][$];   // hits per (GEMROC, trigger)
  int          got_n [int];      // trailer hit count
  logic [11:0] got_st [int];     // trailer status
  int          n_ev [ND];
  bit          irq_seen [ND];

  function automatic int key(input int g, input logic [23:0] tn);
    return g * (1 << 24) + int'(tn);
  endfunction

  task automatic parse_event(input int d);
    logic [23:0] tn;
    int          g, nw;
    tn = ev_w[d][0][47:24];
    check(ev_w[d][0][63:60] == K_EV_HEADER, "event header");
    check(ev_w[d][$][48] == 1'b0, $sformatf("no trigger-number mismatch in event %0d", tn));
    check(ev_w[d][$][23:8] == 16'(ev_w[d].size() - 2), "event word count");
    g = -1; nw = 0;
    for (int i = 1; i < ev_w[d].size() - 1; i++) begin
      logic [63:0] w;
      w = ev_w[d][i];
      case (w[63:60])
        K_TM_HEADER: begin
          g = int'(w[59:55]);
          check(w[47:24] == tn, "packet trigger number equals event number");
          check(g / GPD == d, "packet from a GEMROC of this GEM-DC");
          got_h[key(g, tn)] = {};
        end
        K_TM_TRAILER: begin
          got_n[key(g, tn)]  = int'(w[23:12]);
          got_st[key(g, tn)] = w[11:0];
          check(int'(w[23:12]) == got_h[key(g, tn)].size(), "trailer hit count");
        end
        default: got_h[key(g, tn)].push_back(w);
      endcase
    end
    n_ev[d]++;
  endtask

  always @(negedge clk) for (int d = 0; d < ND; d++)
    vme_rd_en[d] <= rst_n && vme_on && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) for (int d = 0; d < ND; d++) begin
    if (vme_irq[d]) irq_seen[d] = 1;
    if (vme_rd_en[d] && vme_rd_valid[d]) begin
      ev_w[d].push_back(vme_rd_data[d]);
      if (vme_rd_data[d][63:60] == K_EV_TRAILER) begin
        parse_event(d);
        ev_w[d].delete();
      end
    end
  end

  // ---- UDP capture (trigger-less mode) -------------------------------------
  logic [63:0] udp_w [NG][$];
  bit          udp_l [NG][$];
  always @(negedge clk) udp_ready <= NG'($urandom) | NG'($urandom);
  always @(posedge clk) if (rst_n && tl_mode) for (int g = 0; g < NG; g++)
    if (udp_valid[g] && udp_ready[g]) begin
      udp_w[g].push_back(udp_data[g]); udp_l[g].push_back(udp_last[g]);
    end

  // ---- stimulus helpers -----------------------------------------------------
  task automatic fire_l1();
    l1_in = 1;
    repeat (32) @(negedge clk);
    l1_in = 0;
  endtask

  task automatic wait_events(input int n);
    int guard;
    guard = 0;
    while ((n_ev[0] < n || n_ev[1] < n) && guard < 40000) begin
      @(negedge clk);
      guard++;
    end
    check(n_ev[0] >= n && n_ev[1] >= n, $sformatf("%0d events read from each GEM-DC (%0d, %0d)", n, n_ev[0], n_ev[1]));
  endtask

  // One trigger: nin hits inside the window and nout outside, spread over all
  // GEMROCs; 'mod' selects an extra condition to create. Returns the trigger
  // number used.
  typedef enum {M_NONE, M_LINK_ERR, M_OVERFLOW, M_CHECK} mod_e;
  int tnum_next = 0;
  task automatic tm_trigger(input int nin, input int nout, input mod_e mode);
    logic [63:0] exp_h [NG][$];
    logic [15:0] h0;
    logic [23:0] tn;
    int          target;
    tn = 24'(tnum_next);
    @(negedge clk);
    h0 = (tnow - 16'd700) & 16'hFF00;   // window start on a page boundary, in the past
    for (int i = 0; i < nin; i++) begin
      int g, l;
      logic [63:0] w;
      g = $urandom_range(0, NG - 1); l = $urandom_range(0, 15);
      w = hit(h0 + 16'($urandom_range(0, 250)));
      push(g, l, w);
      exp_h[g].push_back(stamped(l, w));
    end
    for (int i = 0; i < nout; i++)
      push($urandom_range(0, NG - 1), $urandom_range(0, 15),
           hit((i % 2) ? h0 - 16'($urandom_range(1, 300)) : h0 + WIN + 16'($urandom_range(0, 150))));
    if (mode == M_LINK_ERR) push(1, 5, hit(h0 - 16'd2000), 1);
    if (mode == M_OVERFLOW)
      // 40 hits of one page into FEB 1 of GEMROC 2
      for (int i = 0; i < 40; i++) push(2, 4 + i % 4, hit(h0 + 16'($urandom_range(0, 255))));
    if (mode == M_CHECK) begin
      @(negedge clk) check_in = 1;
      repeat (32) @(negedge clk);
      check_in = 0;
    end
    while (tnow != h0 + LAT - 16'd2) @(negedge clk);
    target = n_ev[0] + 1;
    fire_l1();
    tnum_next++;
    wait_events(target);
    repeat (200) @(negedge clk);
    for (int g = 0; g < NG; g++) begin
      logic [63:0] e [$], r [$];
      logic [11:0] est;
      int k;
      k = key(g, tn);
      check(got_n.exists(k), $sformatf("packet of GEMROC %0d for trigger %0d", g, tn));
      if (!got_n.exists(k)) continue;
      est = 12'h000;
      if (mode == M_LINK_ERR && g == 1) est[2] = 1;
      if (mode == M_OVERFLOW && g == 2) est[1] = 1;
      if (mode == M_CHECK) est[3] = 1;
      check(got_st[k] == est, $sformatf("GEMROC %0d trigger %0d status %h expected %h", g, tn, got_st[k], est));
      if (mode == M_OVERFLOW && g == 2) begin
        check(got_n[k] == 32 + exp_h[g].size() - 0 || got_n[k] <= 32 + exp_h[g].size(),
              "overflowing page holds at most 32 hits per FEB");
        if (got_st[k][1]) n_ovf++;
      end else begin
        e = exp_h[g]; r = got_h[k];
        e.sort(); r.sort();
        check(e == r, $sformatf("GEMROC %0d trigger %0d: %0d hits, %0d expected", g, tn, r.size(), e.size()));
        if (e == r && nout > 0) n_rej++;
      end
      if (got_st[k][2]) n_lerr++;
      if (got_st[k][3]) n_cerr++;
    end
    n_tm++;
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < NG; g++) begin
      tiger_enable[g] = '1; cfg_cmd_valid[g] = '0; cfg_cmd_tiger[g] = '0; cfg_miso[g] = '0;
      for (int f = 0; f < 4; f++) cfg_cmd_data[g][f] = '0;
    end
    for (int d = 0; d < ND; d++) begin dc_port_enable[d] = 4'b0011; n_ev[d] = 0; irq_seen[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(posedge clk);
    for (int g = 0; g < NG; g++) check(link_locked[g] == '1, "links locked");
    repeat (1500) @(negedge clk);

    // ---- trigger-matched running ----
    tm_trigger(20, 10, M_NONE);
    tm_trigger(40, 20, M_NONE);
    tm_trigger(6, 4, M_LINK_ERR);
    tm_trigger(6, 4, M_OVERFLOW);
    tm_trigger(6, 4, M_CHECK);           // 5 triggers so far: Check is wrong
    check(dc_link_err == '0, "no symbol error on the optical links");
    check(dc_port_overflow[0] == '0 && dc_port_overflow[1] == '0, "no GEM-DC port overflow");
    for (int d = 0; d < ND; d++) if (irq_seen[d]) n_irq++;
    check(vme_irq == '0, "irq cleared after reading");

    // ---- burst of triggers: Full, a lost trigger, GEM-DC buffer nearly full
    begin
      int target, lost;
      vme_on = 0;
      proc_delay = 16'd4000;
      target = n_ev[0];
      for (int t = 0; t < 10; t++) begin
        fire_l1();
        repeat (8) @(negedge clk);
      end
      n_lost = 0;
      repeat (10) @(negedge clk);
      proc_delay = DLY;
      repeat (3000) @(negedge clk);
      vme_on = 1;
      // 8 triggers fit the queue of 8, the other 2 are lost
      wait_events(target + 8);
      repeat (500) @(negedge clk);
      check(n_ev[0] == target + 8 && n_ev[1] == target + 8, "8 of 10 burst triggers processed");
      lost = 0;
      for (int t = 0; t < 10; t++)
        for (int g = 0; g < NG; g++)
          if (got_st.exists(key(g, 24'(tnum_next + t))) && got_st[key(g, 24'(tnum_next + t))][4]) lost++;
      if (lost > 0) n_lost++;
      tnum_next += 10;
    end

    // ---- trigger-less running ----
    @(negedge clk) tl_mode = 1; n_switch++;
    begin
      logic [63:0] sent [NG][$], got [$], p [$];
      // GEMROC 0: 208 words (one packet closes at 180); GEMROC 3: 10 words
      for (int i = 0; i < 208; i++) begin
        logic [63:0] w;
        w = hit(16'(i));
        push(0, i % 16, w);
        sent[0].push_back(stamped(i % 16, w));
      end
      for (int i = 0; i < 10; i++) begin
        logic [63:0] w;
        w = hit(16'(i));
        push(3, i, w);
        sent[3].push_back(stamped(i, w));
      end
      repeat (8 * (1 << FW) * 3) @(negedge clk);
      for (int g = 0; g < NG; g++) begin
        got.delete();
        while (udp_w[g].size() > 0) begin
          bit done;
          p.delete(); done = 0;
          while (!done && udp_w[g].size() > 0) begin
            p.push_back(udp_w[g].pop_front());
            done = udp_l[g].pop_front();
          end
          if (!done) break;   // a packet still open when the capture ends
          check(p[0][63:60] == K_TL_HEADER && p[$][63:60] == K_TL_TRAILER, "TL packet framing");
          check(p.size() - 2 <= 180, "TL packet within 180 words");
          if (p.size() - 2 == 180) n_180++;
          else if (p.size() > 2) n_frames++;
          for (int i = 1; i < p.size() - 1; i++) got.push_back(p[i]);
        end
        got.sort(); sent[g].sort();
        check(got == sent[g], $sformatf("TL GEMROC %0d: %0d words back, %0d sent", g, got.size(), sent[g].size()));
      end
    end
    @(negedge clk) tl_mode = 0;
    repeat (100) @(negedge clk);
    tm_trigger(10, 4, M_NONE);
    n_switch++;

    $display("mechanisms: tm_event=%0d window_reject=%0d lb_overflow=%0d link_error=%0d check_error=%0d roc_full=%0d trig_lost=%0d dc_almost_full=%0d irq=%0d tl_close_words=%0d tl_close_frames=%0d mode_switch=%0d",
             n_tm, n_rej, n_ovf, n_lerr, n_cerr, n_full, n_lost, n_afull, n_irq, n_180, n_frames, n_switch);
    check(n_tm > 0, "tm_event happened");
    check(n_rej > 0, "window_reject happened");
    check(n_ovf > 0, "lb_overflow happened");
    check(n_lerr > 0, "link_error happened");
    check(n_cerr > 0, "check_error happened");
    check(n_full > 0, "roc_full happened");
    check(n_lost > 0, "trig_lost happened");
    check(n_afull > 0, "dc_almost_full happened");
    check(n_irq > 0, "irq happened");
    check(n_180 > 0, "tl_close_words happened");
    check(n_frames > 0, "tl_close_frames happened");
    check(n_switch >= 2, "mode_switch happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
