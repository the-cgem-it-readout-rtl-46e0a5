// tm_engine: trigger-matched (TM) event selection of a GEMROC.
//
// For each L1 trigger in the queue the engine waits until PROC_DELAY clocks
// have passed since the trigger's time-of-arrival stamp (the programmable
// delay that covers the random transmission latency of the TIGER links), then
// computes the trigger window: it opens l1_latency clocks before the arrival
// stamp and lasts win_len clocks. The buckets (pages) of the latency buffers
// that overlap the window are read, FEB after FEB, location after location,
// and every hit whose coarse timestamp lies in the window is forwarded. The
// packet is a header (GEMROC id, trigger number, arrival stamp), the matched
// hits, and a trailer (trigger number, number of hits, GEMROC status flags
// collected since the previous trailer). This follows the paper's description;
// the window arithmetic (modulo 2^16), scan order, word layout and the two
// clocks spent per buffer location are this design's choices.
//
// Interfaces: trigger queue (trig_*), one shared read address to all latency
// buffers (lb_page, lb_idx) with per-FEB data and fill count, and a
// valid/ready output stream with out_last on the trailer.
module tm_engine #(
  parameter int unsigned N_FEB      = 4,
  parameter int unsigned N_PAGES    = 16,
  parameter int unsigned PAGE_LOC   = 32,
  parameter int unsigned PAGE_CYC_W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         enable,
  input  logic [15:0]                  now,
  input  logic [4:0]                   gemroc_id,
  input  logic [N_FEB-1:0]             feb_enable,
  input  logic [15:0]                  l1_latency,
  input  logic [15:0]                  win_len,
  input  logic [15:0]                  proc_delay,
  // trigger queue
  input  logic                         trig_valid,
  input  logic [23:0]                  trig_num,
  input  logic [15:0]                  trig_ts,
  output logic                         trig_pop,
  // latency buffers
  output logic [$clog2(N_PAGES)-1:0]   lb_page,
  output logic [$clog2(PAGE_LOC)-1:0]  lb_idx,
  input  logic [63:0]                  lb_data [N_FEB],
  input  logic [$clog2(PAGE_LOC):0]    lb_fill [N_FEB],
  // status events to report in the trailer
  input  logic                         ev_lb_overflow,
  input  logic                         ev_link_error,
  input  logic                         ev_check_error,
  input  logic                         ev_trig_lost,
  // packet output
  output logic                         out_valid,
  output logic [63:0]                  out_data,
  output logic                         out_last,
  input  logic                         out_ready,
  output logic                         busy
);
  import cgem_pkg::*;

  localparam int unsigned PW = $clog2(N_PAGES);
  localparam int unsigned IW = $clog2(PAGE_LOC);
  localparam int unsigned FW = (N_FEB > 1) ? $clog2(N_FEB) : 1;

  typedef enum logic [2:0] {S_IDLE, S_HEADER, S_ADDR, S_DATA, S_HIT, S_TRAILER} state_e;
  state_e state;

  logic [23:0]          tnum;
  logic [15:0]          tts, wstart;
  logic [PW-1:0]        last_page;
  logic [FW-1:0]        feb;
  logic [HIT_CNT_W-1:0] nhits;
  tm_status_t           st;
  logic [63:0]          hit_word;

  tiger_word_t          rw;
  logic [15:0]          dt;
  logic                 in_win;

  always_comb begin
    rw     = tiger_word_t'(lb_data[feb]);
    dt     = rw.hit.tcoarse - wstart;
    in_win = (dt < win_len);
  end

  wire [15:0] ws_n   = trig_ts - l1_latency;
  wire [15:0] wend_n = ws_n + win_len - 16'd1;
  wire        go     = enable && trig_valid && ((now - trig_ts) >= proc_delay);
  wire        last_feb = (int'(feb) == N_FEB-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tnum      <= '0;
      tts       <= '0;
      wstart    <= '0;
      last_page <= '0;
      feb       <= '0;
      lb_page   <= '0;
      lb_idx    <= '0;
      nhits     <= '0;
      st        <= '0;
      hit_word  <= '0;
    end else begin
      case (state)
        S_IDLE: if (go) begin
          tnum      <= trig_num;
          tts       <= trig_ts;
          wstart    <= ws_n;
          lb_page   <= ws_n[PAGE_CYC_W +: PW];
          last_page <= wend_n[PAGE_CYC_W +: PW];
          lb_idx    <= '0;
          feb       <= '0;
          nhits     <= '0;
          state     <= S_HEADER;
        end
        S_HEADER: if (out_ready) state <= S_ADDR;
        S_ADDR: begin
          // lb_page/lb_idx address the RAM this clock; data arrive next clock.
          if (feb_enable[feb] && ({1'b0, lb_idx} < lb_fill[feb])) state <= S_DATA;
          else begin
            lb_idx <= '0;
            if (!last_feb) feb <= feb + 1'b1;
            else begin
              feb <= '0;
              if (lb_page == last_page) state <= S_TRAILER;
              else lb_page <= lb_page + 1'b1;
            end
          end
        end
        S_DATA: begin
          lb_idx <= lb_idx + 1'b1;
          if (rw.wtype == TW_HIT && in_win) begin
            hit_word <= lb_data[feb];
            state    <= S_HIT;
          end else if (int'(lb_idx) == PAGE_LOC-1) begin
            lb_idx <= '0;
            state  <= S_ADDR;
            if (!last_feb) feb <= feb + 1'b1;
            else begin
              feb <= '0;
              if (lb_page == last_page) state <= S_TRAILER;
              else lb_page <= lb_page + 1'b1;
            end
          end else state <= S_ADDR;
        end
        S_HIT: if (out_ready) begin
          if (nhits == '1) st.out_truncated <= 1'b1;
          else nhits <= nhits + 1'b1;
          state <= S_ADDR;
          if (lb_idx == '0) begin
            // the hit was in the last location of the page
            state <= S_ADDR;
            if (!last_feb) feb <= feb + 1'b1;
            else begin
              feb <= '0;
              if (lb_page == last_page) state <= S_TRAILER;
              else lb_page <= lb_page + 1'b1;
            end
          end
        end
        S_TRAILER: if (out_ready) begin
          st    <= '0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      // status events are recorded after the trailer has cleared the flags
      if (ev_lb_overflow) st.lb_overflow    <= 1'b1;
      if (ev_link_error)  st.link_error     <= 1'b1;
      if (ev_check_error) st.check_error    <= 1'b1;
      if (ev_trig_lost)   st.trig_fifo_full <= 1'b1;
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_data  = hit_word;
    case (state)
      S_HEADER:  begin out_valid = 1'b1; out_data = tm_header(gemroc_id, tnum, tts); end
      S_HIT:     begin out_valid = 1'b1; end
      S_TRAILER: begin out_valid = 1'b1; out_last = 1'b1;
                       out_data = tm_trailer(gemroc_id, tnum, nhits, st); end
      default: ;
    endcase
  end

  assign trig_pop = (state == S_TRAILER) && out_ready;
  assign busy     = (state != S_IDLE);

endmodule
