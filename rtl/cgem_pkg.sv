// cgem_pkg: constants and 64-bit word formats shared by the CGEM-IT readout
// data path (GEMROC trigger-matched / trigger-less processing and GEM-DC).
//
// Timing figures that follow the paper: the TIGER clock runs at four times the
// 41.65 MHz BESIII clock (166.6 MHz, 6.0 ns); a latency-buffer bucket spans
// 2^8 TIGER clock cycles (1.53 us) and holds 32 locations; the buffer wraps
// after 16 buckets (24.6 us); a TIGER frame is 2^15 clock cycles; the L1
// trigger arrives 8.6 us after the event with a 1.6 us acceptance window.
//
// The bit layout of the words is this design's own choice. The paper states
// only that a TIGER hit carries 54 bits and that every hit leaves the GEMROC as
// an 8-byte word inside a packet framed by a header and a trailer. The 54-bit
// hit payload is split as {channel 6, TAC 2, tcoarse 16, ecoarse 10,
// tfine 10, efine 10}; tcoarse is the coarse timestamp used for trigger
// matching.
package cgem_pkg;

  localparam int unsigned WORD_W      = 64;  // 8-byte word on links and packets
  localparam int unsigned HIT_W       = 54;  // TIGER hit payload
  localparam int unsigned TS_W        = 16;  // coarse timestamp width
  localparam int unsigned TRIG_NUM_W  = 24;  // L1 trigger number width
  localparam int unsigned TIGER_ID_W  = 3;   // 8 TIGERs per GEMROC
  localparam int unsigned GEMROC_ID_W = 5;   // 22 GEMROCs
  localparam int unsigned HIT_CNT_W   = 12;  // hits per trigger-matched packet

  // Word kinds, bits [63:60].
  typedef enum logic [3:0] {
    K_TM_HEADER  = 4'h1,
    K_TM_TRAILER = 4'h2,
    K_TL_HEADER  = 4'h3,
    K_TL_TRAILER = 4'h4,
    K_EV_HEADER  = 4'h5,
    K_EV_TRAILER = 4'h6
  } pkt_kind_e;

  // TIGER word types, bits [63:62].
  typedef enum logic [1:0] {
    TW_GEMROC  = 2'b00,  // header/trailer words built downstream
    TW_COUNTER = 2'b01,
    TW_HIT     = 2'b10,
    TW_FRAME   = 2'b11
  } tiger_word_e;

  typedef struct packed {
    logic [5:0]  channel;
    logic [1:0]  tac;
    logic [15:0] tcoarse;
    logic [9:0]  ecoarse;
    logic [9:0]  tfine;
    logic [9:0]  efine;
  } hit_payload_t;  // 54 bits

  // One 8-byte TIGER word as seen by the GEMROC (after the link receiver has
  // inserted the TIGER number).
  typedef struct packed {
    tiger_word_e            wtype;     // [63:62]
    logic [TIGER_ID_W-1:0]  tiger_id;  // [61:59]
    logic [4:0]             rsvd;      // [58:54]
    hit_payload_t           hit;       // [53:0]
  } tiger_word_t;

  // Trailer status bits of a trigger-matched packet.
  typedef struct packed {
    logic [6:0] rsvd;
    logic       trig_fifo_full;   // trigger queue was full (trigger lost)
    logic       check_error;      // Check signal disagreed with trigger count
    logic       link_error;       // 8b/10b error seen on a TIGER link
    logic       lb_overflow;      // a latency-buffer page was full
    logic       out_truncated;    // hit count saturated
  } tm_status_t;  // 12 bits

  function automatic logic [WORD_W-1:0] tm_header(input logic [GEMROC_ID_W-1:0] gid,
                                                  input logic [TRIG_NUM_W-1:0] tnum,
                                                  input logic [TS_W-1:0] tts);
    return {K_TM_HEADER, gid, 7'd0, tnum, 8'd0, tts};
  endfunction

  function automatic logic [WORD_W-1:0] tm_trailer(input logic [GEMROC_ID_W-1:0] gid,
                                                   input logic [TRIG_NUM_W-1:0] tnum,
                                                   input logic [HIT_CNT_W-1:0] nhits,
                                                   input tm_status_t st);
    return {K_TM_TRAILER, gid, 7'd0, tnum, nhits, st};
  endfunction

  function automatic logic [TRIG_NUM_W-1:0] word_trig_num(input logic [WORD_W-1:0] w);
    return w[47:24];
  endfunction

  function automatic logic [3:0] word_kind(input logic [WORD_W-1:0] w);
    return w[63:60];
  endfunction

endpackage
