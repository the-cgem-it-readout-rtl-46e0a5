// tb_cgem_readout_full: the whole readout chain at its full size (22 GEMROCs
// with 16 TIGER links each, two GEM-DCs with 16 ports, 11 used on each),
// every parameter at its default. All 352 links are driven by TIGER link
// models. One trigger-matched operation is run: hits are placed inside and
// outside the trigger window on several GEMROCs, one L1 trigger is sent, and
// each GEM-DC must deliver over its VME side one event holding one packet
// from each of its 11 GEMROCs, with exactly the in-window hits.
`timescale 1ns/1ps
module tb_cgem_readout_full;
  import cgem_pkg::*;
  localparam int NG = 22, ND = 2, NP = 16, GPD = 11;
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
  logic             l1_in = 0, check_in = 0, full_out;
  logic [7:0]       tiger_enable [NG];
  logic [3:0]       cfg_cmd_valid [NG], cfg_cmd_tiger [NG], cfg_cmd_ready [NG], cfg_rsp_valid [NG];
  logic [3:0]       cfg_sclk [NG], cfg_mosi [NG], cfg_miso [NG];
  logic [31:0]      cfg_cmd_data [NG][4], cfg_rsp_data [NG][4];
  logic [1:0]       cfg_cs_n [NG][4];
  logic [NG-1:0]    udp_valid, udp_last;
  logic [63:0]      udp_data [NG];
  logic [NP-1:0]    dc_port_enable [ND], dc_port_overflow [ND];
  logic [ND-1:0]    vme_rd_en, vme_rd_valid, vme_irq, dc_link_err;
  logic [63:0]      vme_rd_data [ND];
  logic [31:0]      dc_events_built [ND];
  logic [23:0]      trig_count [NG];
  logic [31:0]      tl_pkt_count [NG];

  cgem_readout_top dut (
    .clk, .rst_n, .link_ddr, .link_locked, .l1_in, .check_in, .full_out,
    .tl_mode(1'b0), .tiger_enable, .l1_latency(LAT), .win_len(WIN), .proc_delay(DLY),
    .cfg_cmd_valid, .cfg_cmd_tiger, .cfg_cmd_data, .cfg_cmd_ready, .cfg_rsp_valid,
    .cfg_rsp_data, .cfg_sclk, .cfg_mosi, .cfg_cs_n, .cfg_miso,
    .udp_valid, .udp_data, .udp_last, .udp_ready('1),
    .dc_port_enable, .vme_rd_en, .vme_rd_valid, .vme_rd_data, .vme_irq,
    .dc_events_built, .dc_port_overflow, .dc_link_err, .trig_count, .tl_pkt_count);

  logic [15:0] tnow;
  always @(posedge clk or negedge rst_n) tnow <= !rst_n ? 16'd0 : tnow + 16'd1;

  logic [63:0] txq [NG*16][$];
  for (genvar g = 0; g < NG; g++) begin : g_g
    for (genvar l = 0; l < 16; l++) begin : g_l
      tiger_tx_model u (.clk, .rst_n, .ddr_bits(link_ddr[g][l]));
      always @(posedge clk) if (txq[16*g+l].size() > 0 && u.pending() < 16)
        u.send_word(txq[16*g+l].pop_front());
    end
  end

  // VME readout: collect each GEM-DC's first event
  logic [63:0] ev_w [ND][$];
  int          n_ev [ND];
  always @(negedge clk) for (int d = 0; d < ND; d++) vme_rd_en[d] <= rst_n;
  always @(posedge clk) if (rst_n) for (int d = 0; d < ND; d++)
    if (vme_rd_en[d] && vme_rd_valid[d]) begin
      ev_w[d].push_back(vme_rd_data[d]);
      if (vme_rd_data[d][63:60] == K_EV_TRAILER) n_ev[d]++;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp_h [NG][$];
    logic [15:0] h0;
    int          l1_cycle, done_cycle, cyc;
    for (int g = 0; g < NG; g++) begin
      tiger_enable[g] = '1; cfg_cmd_valid[g] = '0; cfg_cmd_tiger[g] = '0; cfg_miso[g] = '0;
      for (int f = 0; f < 4; f++) cfg_cmd_data[g][f] = '0;
    end
    for (int d = 0; d < ND; d++) begin dc_port_enable[d] = 16'h07FF; n_ev[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(posedge clk);
    for (int g = 0; g < NG; g++) check(link_locked[g] == '1, $sformatf("GEMROC %0d links locked", g));
    repeat (1200) @(negedge clk);
    // hits 700..450 clocks in the past: in the window [h0, h0 + 267)
    h0 = tnow - 16'd700;
    for (int g = 0; g < NG; g += 3)
      for (int i = 0; i < 4; i++) begin
        int l;
        logic [63:0] w;
        l = (g + 5 * i) % 16;
        w = {2'b10, 3'd0, 5'd0, 6'(i), 2'd1, h0 + 16'(60 * i), 30'(g)};
        txq[16*g+l].push_back(w);
        exp_h[g].push_back({w[63:62], 3'(l / 2), w[58:0]});
        // and one hit just before the window opens
        txq[16*g+l].push_back({2'b10, 3'd0, 5'd0, 6'(i), 2'd1, h0 - 16'd1, 30'(g)});
      end
    while (tnow != h0 + LAT - 16'd2) @(negedge clk);
    l1_in = 1;
    repeat (32) @(negedge clk);
    l1_in = 0;
    cyc = 0;
    while ((n_ev[0] < 1 || n_ev[1] < 1) && cyc < 10000) begin
      @(negedge clk);
      cyc++;
    end
    $display("event read out of both GEM-DCs %0d clocks after the L1 pulse ended", cyc);
    for (int d = 0; d < ND; d++) begin
      int g;
      logic [63:0] got [$];
      check(n_ev[d] == 1, $sformatf("GEM-DC %0d: one event", d));
      if (n_ev[d] != 1) continue;
      check(ev_w[d][0] == {K_EV_HEADER, 12'd0, 24'd0, 8'd0, 16'(NP)}, "event header");
      check(ev_w[d][$][48] == 1'b0, "no trigger-number mismatch");
      check(ev_w[d][$][23:8] == 16'(ev_w[d].size() - 2), "event word count");
      g = -1;
      for (int i = 1; i < ev_w[d].size() - 1; i++) begin
        logic [63:0] w;
        w = ev_w[d][i];
        if (w[63:60] == K_TM_HEADER) begin
          check(int'(w[59:55]) == g + 1 + (g < 0 ? d * GPD : 0), $sformatf("GEM-DC %0d: packets in port order", d));
          g = int'(w[59:55]);
          check(w == tm_header(5'(g), 24'd0, h0 + LAT), "TM header");
          got.delete();
        end else if (w[63:60] == K_TM_TRAILER) begin
          logic [63:0] e [$];
          e = exp_h[g];
          e.sort(); got.sort();
          check(got == e, $sformatf("GEMROC %0d: %0d hits, %0d expected", g, got.size(), e.size()));
          check(w == tm_trailer(5'(g), 24'd0, 12'(e.size()), '0), $sformatf("GEMROC %0d trailer %h", g, w));
        end else got.push_back(w);
      end
      check(g == d * GPD + GPD - 1, $sformatf("GEM-DC %0d: all %0d GEMROC packets", d, GPD));
    end
    check(dc_link_err == '0, "no optical-link symbol error");
    check(!full_out, "Full not raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
