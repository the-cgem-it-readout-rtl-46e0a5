// cgem_readout_top: digital readout chain of the CGEM inner tracker.
//
// N_GEMROC GEMROC data paths (22 in the full system: 20 would suffice, two
// more keep the two sides of every layer symmetric) each read four FEBs, i.e.
// 8 TIGERs and 16 data links. Their trigger-matched packets travel over
// 8b/10b optical links to N_GEMDC GEM Data Concentrators (2, with 16 input
// ports each); GEMROC g is wired to port (g mod GEMROC_PER_DC) of GEM-DC
// (g / GEMROC_PER_DC). Each GEM-DC builds events by trigger number and raises
// an interrupt for the VME CPU, which reads the event buffer through the
// vme_* ports.
//
// The BESIII L1 and Check lines are shared by all GEMROCs; the Full line sent
// back to BESIII is the OR of every GEMROC's Full and every GEM-DC's
// event-buffer-nearly-full flag. The run configuration (mode, window, delays)
// is common to all GEMROCs; each GEMROC receives its index as its id.
//
// Parts that are not logic of this design appear as ports: the TIGER link
// line bits (from the FEBs), the TIGER configuration pins, the UDP streams
// towards each GEMROC's Ethernet MAC and the configuration commands from each
// GEMROC's slow-control processor. The optical transceivers are not modelled:
// the 10-bit symbol of each GEMROC goes straight to its GEM-DC input port,
// one symbol per clock (200 Msymbol/s at 2 Gb/s is above the 166.6 MHz clock).
// Everything is clocked by the 166.6 MHz TIGER clock.
module cgem_readout_top #(
  parameter int unsigned N_GEMROC      = 22,
  parameter int unsigned N_GEMDC       = 2,
  parameter int unsigned GEMDC_PORTS   = 16,
  parameter int unsigned GEMROC_PER_DC = 11,
  parameter int unsigned PORT_DEPTH    = 512,
  parameter int unsigned EVB_DEPTH     = 4096,
  parameter int unsigned FRAME_W       = 15
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // TIGER data links, per GEMROC
  input  logic [1:0]                 link_ddr [N_GEMROC][16],
  output logic [15:0]                link_locked [N_GEMROC],
  // BESIII fast control
  input  logic                       l1_in,
  input  logic                       check_in,
  output logic                       full_out,
  // run configuration
  input  logic                       tl_mode,
  input  logic [7:0]                 tiger_enable [N_GEMROC],
  input  logic [15:0]                l1_latency,
  input  logic [15:0]                win_len,
  input  logic [15:0]                proc_delay,
  // TIGER configuration links, per GEMROC and FEB
  input  logic [3:0]                 cfg_cmd_valid [N_GEMROC],
  input  logic [3:0]                 cfg_cmd_tiger [N_GEMROC],
  input  logic [31:0]                cfg_cmd_data  [N_GEMROC][4],
  output logic [3:0]                 cfg_cmd_ready [N_GEMROC],
  output logic [3:0]                 cfg_rsp_valid [N_GEMROC],
  output logic [31:0]                cfg_rsp_data  [N_GEMROC][4],
  output logic [3:0]                 cfg_sclk [N_GEMROC],
  output logic [3:0]                 cfg_mosi [N_GEMROC],
  output logic [1:0]                 cfg_cs_n [N_GEMROC][4],
  input  logic [3:0]                 cfg_miso [N_GEMROC],
  // UDP streams towards the Ethernet MACs
  output logic [N_GEMROC-1:0]        udp_valid,
  output logic [63:0]                udp_data [N_GEMROC],
  output logic [N_GEMROC-1:0]        udp_last,
  input  logic [N_GEMROC-1:0]        udp_ready,
  // GEM-DC VME side
  input  logic [GEMDC_PORTS-1:0]     dc_port_enable [N_GEMDC],
  input  logic [N_GEMDC-1:0]         vme_rd_en,
  output logic [N_GEMDC-1:0]         vme_rd_valid,
  output logic [63:0]                vme_rd_data [N_GEMDC],
  output logic [N_GEMDC-1:0]         vme_irq,
  output logic [31:0]                dc_events_built [N_GEMDC],
  output logic [GEMDC_PORTS-1:0]     dc_port_overflow [N_GEMDC],
  output logic [N_GEMDC-1:0]         dc_link_err,
  // status
  output logic [23:0]                trig_count [N_GEMROC],
  output logic [31:0]                tl_pkt_count [N_GEMROC]
);
  logic [9:0]          sym       [N_GEMROC];
  logic [N_GEMROC-1:0] roc_full;
  logic [N_GEMDC-1:0]  dc_afull;
  logic [15:0]         roc_now   [N_GEMROC];

  for (genvar g = 0; g < N_GEMROC; g++) begin : g_roc
    gemroc #(.N_FEB(4), .FIFO_DEPTH(64), .N_PAGES(16), .PAGE_LOC(32),
             .MAX_WORDS(180), .FRAME_W(FRAME_W), .CFG_W(32)) u_roc (
      .clk, .rst_n,
      .gemroc_id(5'(g)),
      .link_ddr(link_ddr[g]),
      .link_locked(link_locked[g]),
      .l1_in, .check_in,
      .full_out(roc_full[g]),
      .tl_mode,
      .tiger_enable(tiger_enable[g]),
      .l1_latency, .win_len, .proc_delay,
      .cfg_cmd_valid(cfg_cmd_valid[g]),
      .cfg_cmd_tiger(cfg_cmd_tiger[g]),
      .cfg_cmd_data(cfg_cmd_data[g]),
      .cfg_cmd_ready(cfg_cmd_ready[g]),
      .cfg_rsp_valid(cfg_rsp_valid[g]),
      .cfg_rsp_data(cfg_rsp_data[g]),
      .cfg_sclk(cfg_sclk[g]),
      .cfg_mosi(cfg_mosi[g]),
      .cfg_cs_n(cfg_cs_n[g]),
      .cfg_miso(cfg_miso[g]),
      .udp_valid(udp_valid[g]),
      .udp_data(udp_data[g]),
      .udp_last(udp_last[g]),
      .udp_ready(udp_ready[g]),
      .opt_sym_en(1'b1),
      .opt_sym(sym[g]),
      .trig_count(trig_count[g]),
      .tl_pkt_count(tl_pkt_count[g]),
      .now(roc_now[g])
    );
  end

  for (genvar d = 0; d < N_GEMDC; d++) begin : g_dc
    logic [GEMDC_PORTS-1:0] p_valid, p_last, p_err;
    logic [63:0]            p_data [GEMDC_PORTS];
    logic [15:0]            ev_ready;

    for (genvar p = 0; p < GEMDC_PORTS; p++) begin : g_port
      localparam int unsigned G = d * GEMROC_PER_DC + p;
      if (p < GEMROC_PER_DC && G < N_GEMROC) begin : g_used
        gemdc_link_rx u_rx (
          .clk, .rst_n,
          .sym_valid(1'b1),
          .sym(sym[G]),
          .out_valid(p_valid[p]),
          .out_data(p_data[p]),
          .out_last(p_last[p]),
          .err(p_err[p])
        );
      end else begin : g_unused
        assign p_valid[p] = 1'b0;
        assign p_data[p]  = '0;
        assign p_last[p]  = 1'b0;
        assign p_err[p]   = 1'b0;
      end
    end

    gemdc_event_builder #(.N_PORT(GEMDC_PORTS), .PORT_DEPTH(PORT_DEPTH), .EVB_DEPTH(EVB_DEPTH)) u_evb (
      .clk, .rst_n,
      .port_enable(dc_port_enable[d]),
      .in_valid(p_valid), .in_data(p_data), .in_last(p_last),
      .port_overflow(dc_port_overflow[d]),
      .rd_en(vme_rd_en[d]),
      .rd_valid(vme_rd_valid[d]),
      .rd_data(vme_rd_data[d]),
      .irq(vme_irq[d]),
      .events_ready(ev_ready),
      .almost_full(dc_afull[d]),
      .events_built(dc_events_built[d])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) dc_link_err[d] <= 1'b0;
      else if (|p_err) dc_link_err[d] <= 1'b1;
    end
  end

  assign full_out = (|roc_full) || (|dc_afull);

endmodule
