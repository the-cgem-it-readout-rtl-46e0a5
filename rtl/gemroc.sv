// gemroc: data-path firmware of one GEM Read Out Card (GEMROC).
//
// A GEMROC reads four front-end boards (FEBs), each with two TIGER ASICs that
// drive two 8b/10b data links, i.e. 16 links. Each link has a receiver
// (tiger_link_rx); the four links of a FEB feed that FEB's rate-levelling FIFO
// (feb_input_fifo). A free-running 16-bit coarse-time counter 'now' counts
// TIGER clocks; it is assumed to be reset together with the TIGER coarse
// counters so that hit timestamps and 'now' share one time base.
//
// Trigger-matched mode (tl_mode = 0, the mode used in BESIII): FEB data go to
// the FEB's latency buffer; the fast-control interface logs each L1 trigger;
// the TM engine builds one packet per trigger from the buffers. Packets go to
// the optical link towards the GEM-DC (dci_tx symbol stream) and, in parallel,
// to the UDP output stream (for the Ethernet MAC, outside this module).
// Trigger-less mode (tl_mode = 1, stand-alone debugging): FEB data are merged
// by the TL packetizer and leave on the UDP stream only.
//
// Also here: four SPI-like configuration links (one per FEB) driven by
// commands from the slow-control processor, which is outside this module.
// Everything runs on the 166.6 MHz TIGER clock.
module gemroc #(
  parameter int unsigned N_FEB      = 4,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned N_PAGES    = 16,
  parameter int unsigned PAGE_LOC   = 32,
  parameter int unsigned MAX_WORDS  = 180,
  parameter int unsigned FRAME_W    = 15,
  parameter int unsigned CFG_W      = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [4:0]           gemroc_id,
  // TIGER data links: index = 4*FEB + 2*TIGER-on-FEB + link
  input  logic [1:0]           link_ddr [4*N_FEB],
  output logic [4*N_FEB-1:0]   link_locked,
  // BESIII fast control
  input  logic                 l1_in,
  input  logic                 check_in,
  output logic                 full_out,
  // run configuration
  input  logic                 tl_mode,
  input  logic [2*N_FEB-1:0]   tiger_enable,
  input  logic [15:0]          l1_latency,
  input  logic [15:0]          win_len,
  input  logic [15:0]          proc_delay,
  // TIGER configuration links
  input  logic [N_FEB-1:0]     cfg_cmd_valid,
  input  logic [N_FEB-1:0]     cfg_cmd_tiger,
  input  logic [CFG_W-1:0]     cfg_cmd_data [N_FEB],
  output logic [N_FEB-1:0]     cfg_cmd_ready,
  output logic [N_FEB-1:0]     cfg_rsp_valid,
  output logic [CFG_W-1:0]     cfg_rsp_data [N_FEB],
  output logic [N_FEB-1:0]     cfg_sclk,
  output logic [N_FEB-1:0]     cfg_mosi,
  output logic [1:0]           cfg_cs_n [N_FEB],
  input  logic [N_FEB-1:0]     cfg_miso,
  // packet stream to the Ethernet MAC (UDP payload)
  output logic                 udp_valid,
  output logic [63:0]          udp_data,
  output logic                 udp_last,
  input  logic                 udp_ready,
  // symbol stream to the 2 Gb/s optical transceiver
  input  logic                 opt_sym_en,
  output logic [9:0]           opt_sym,
  // status
  output logic [23:0]          trig_count,
  output logic [31:0]          tl_pkt_count,
  output logic [15:0]          now
);
  localparam int unsigned NL = 4 * N_FEB;
  localparam int unsigned PW = $clog2(N_PAGES);
  localparam int unsigned IW = $clog2(PAGE_LOC);

  logic [NL-1:0]    lw_valid, l_err;
  logic [63:0]      lw      [NL];
  logic [15:0]      l_errcnt[NL];

  logic [N_FEB-1:0] f_valid, f_ready, f_drop, f_afull, lb_ovf;
  logic [63:0]      f_word  [N_FEB];
  logic [N_FEB-1:0] tl_ready;
  logic [N_FEB-1:0] feb_enable;

  logic [PW-1:0]    lb_page;
  logic [IW-1:0]    lb_idx;
  logic [63:0]      lb_data [N_FEB];
  logic [IW:0]      lb_fill [N_FEB];

  logic             trig_valid, trig_pop, trig_lost, check_error;
  logic [23:0]      trig_num;
  logic [15:0]      trig_ts;

  logic             tm_valid, tm_last, tm_ready, tm_busy;
  logic [63:0]      tm_data;
  logic             tl_valid, tl_last;
  logic [63:0]      tl_data;
  logic             dci_ready, dci_in_pkt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 16'd1;
  end

  // ---- TIGER link receivers ------------------------------------------------
  for (genvar i = 0; i < NL; i++) begin : g_link
    tiger_link_rx #(.TIGER_ID(3'(i / 2))) u_rx (
      .clk, .rst_n,
      .ddr_bits(link_ddr[i]),
      .locked(link_locked[i]),
      .word_valid(lw_valid[i]),
      .word(lw[i]),
      .err(l_err[i]),
      .err_count(l_errcnt[i])
    );
  end

  // ---- per-FEB input FIFO and latency buffer -------------------------------
  for (genvar f = 0; f < N_FEB; f++) begin : g_feb
    logic [63:0] fin [4];
    for (genvar k = 0; k < 4; k++) begin : g_in
      assign fin[k] = lw[4*f + k];
    end
    assign feb_enable[f] = |tiger_enable[2*f +: 2];

    feb_input_fifo #(.NLINK(4), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(lw_valid[4*f +: 4]),
      .in_word(fin),
      .link_enable({{2{tiger_enable[2*f+1]}}, {2{tiger_enable[2*f]}}}),
      .out_valid(f_valid[f]),
      .out_word(f_word[f]),
      .out_ready(f_ready[f]),
      .drop(f_drop[f]),
      .almost_full(f_afull[f])
    );

    // In TM mode the latency buffer takes a word every clock.
    assign f_ready[f] = tl_mode ? tl_ready[f] : 1'b1;

    latency_buffer #(.N_PAGES(N_PAGES), .PAGE_LOC(PAGE_LOC), .PAGE_CYC_W(8)) u_lb (
      .clk, .rst_n, .now,
      .wr_valid(f_valid[f] && !tl_mode),
      .wr_word(f_word[f]),
      .overflow(lb_ovf[f]),
      .rd_page(lb_page),
      .rd_idx(lb_idx),
      .rd_data(lb_data[f]),
      .page_fill(lb_fill[f])
    );
  end

  // ---- fast control and trigger-matched processing ------------------------
  fcs_interface #(.Q_DEPTH(8), .FULL_LEVEL(6)) u_fcs (
    .clk, .rst_n, .now,
    .l1_in, .check_in,
    .trig_valid, .trig_num, .trig_ts, .trig_pop,
    .trig_lost, .check_error, .full_out, .trig_count
  );

  tm_engine #(.N_FEB(N_FEB), .N_PAGES(N_PAGES), .PAGE_LOC(PAGE_LOC), .PAGE_CYC_W(8)) u_tm (
    .clk, .rst_n,
    .enable(!tl_mode),
    .now, .gemroc_id, .feb_enable,
    .l1_latency, .win_len, .proc_delay,
    .trig_valid, .trig_num, .trig_ts, .trig_pop,
    .lb_page, .lb_idx, .lb_data, .lb_fill,
    .ev_lb_overflow(|lb_ovf || |f_drop),
    .ev_link_error(|l_err),
    .ev_check_error(check_error),
    .ev_trig_lost(trig_lost),
    .out_valid(tm_valid), .out_data(tm_data), .out_last(tm_last), .out_ready(tm_ready),
    .busy(tm_busy)
  );

  // ---- trigger-less processing ---------------------------------------------
  tl_packetizer #(.N_IN(N_FEB), .MAX_WORDS(MAX_WORDS), .FRAME_W(FRAME_W), .FRAMES_PKT(8)) u_tl (
    .clk, .rst_n,
    .enable(tl_mode),
    .now, .gemroc_id,
    .in_valid(f_valid & {N_FEB{tl_mode}}),
    .in_word(f_word),
    .in_ready(tl_ready),
    .out_valid(tl_valid), .out_data(tl_data), .out_last(tl_last),
    .out_ready(udp_ready && tl_mode),
    .pkt_count(tl_pkt_count)
  );

  // ---- outputs: TM packets go to both the optical link and UDP -------------
  assign tm_ready = dci_ready && udp_ready;

  dci_tx u_dci (
    .clk, .rst_n,
    .in_valid(tm_valid && udp_ready),
    .in_data(tm_data),
    .in_last(tm_last),
    .in_ready(dci_ready),
    .sym_en(opt_sym_en),
    .sym(opt_sym),
    .in_packet(dci_in_pkt)
  );

  always_comb begin
    if (tl_mode) begin
      udp_valid = tl_valid;
      udp_data  = tl_data;
      udp_last  = tl_last;
    end else begin
      udp_valid = tm_valid && dci_ready;
      udp_data  = tm_data;
      udp_last  = tm_last;
    end
  end

  // ---- TIGER configuration links -------------------------------------------
  for (genvar f = 0; f < N_FEB; f++) begin : g_cfg
    asic_cfg_link #(.FRAME_W(CFG_W), .HALF_DIV(9), .N_TIGER(2)) u_cfg (
      .clk, .rst_n,
      .cmd_valid(cfg_cmd_valid[f]),
      .cmd_tiger(cfg_cmd_tiger[f]),
      .cmd_data(cfg_cmd_data[f]),
      .cmd_ready(cfg_cmd_ready[f]),
      .rsp_valid(cfg_rsp_valid[f]),
      .rsp_data(cfg_rsp_data[f]),
      .sclk(cfg_sclk[f]),
      .mosi(cfg_mosi[f]),
      .cs_n(cfg_cs_n[f]),
      .miso(cfg_miso[f])
    );
  end

endmodule
