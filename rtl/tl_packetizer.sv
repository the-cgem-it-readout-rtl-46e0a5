// tl_packetizer: trigger-less (TL) data merger of a GEMROC.
//
// In trigger-less mode every word received from the enabled TIGERs (hits,
// frame and counter words) is forwarded, without selection, in packets meant
// for UDP transmission. Following the paper, a packet is closed either when it
// holds all the data of eight TIGER time frames (a frame is 2^15 TIGER clocks;
// frame boundaries are taken from the local time counter 'now') or when it has
// collected MAX_WORDS = 180 data words; the remaining data go into the next
// packet. 180 words of 8 bytes plus a header and a trailer word fit in the
// 1500-byte Ethernet payload.
//
// The N_IN FEB streams are merged by a round-robin arbiter. Each packet is a
// header word {TL header kind, GEMROC id, packet number} followed by the data
// words and a trailer word {TL trailer kind, GEMROC id, packet number, word
// count}; out_last marks the trailer. Header/trailer layout and the merge
// order are this design's choices. The output is a valid/ready stream.
module tl_packetizer #(
  parameter int unsigned N_IN        = 4,
  parameter int unsigned MAX_WORDS   = 180,
  parameter int unsigned FRAME_W     = 15,   // log2 clocks per TIGER frame
  parameter int unsigned FRAMES_PKT  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [15:0]       now,
  input  logic [4:0]        gemroc_id,
  input  logic [N_IN-1:0]   in_valid,
  input  logic [63:0]       in_word [N_IN],
  output logic [N_IN-1:0]   in_ready,
  output logic              out_valid,
  output logic [63:0]       out_data,
  output logic              out_last,
  input  logic              out_ready,
  output logic [31:0]       pkt_count
);
  import cgem_pkg::*;

  localparam int unsigned LW = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned CW = $clog2(MAX_WORDS + 1);

  typedef enum logic [1:0] {S_IDLE, S_HEADER, S_DATA, S_TRAILER} state_e;
  state_e state;

  logic [LW-1:0] rr, sel;
  logic          sel_v;
  logic [CW-1:0] nwords;
  logic [3:0]    nframes;
  logic [31:0]   pkt_num;

  wire frame_tick = (now[FRAME_W-1:0] == '0);
  wire close_now  = (int'(nwords) == MAX_WORDS) || (int'(nframes) >= FRAMES_PKT);

  always_comb begin
    sel_v = 1'b0;
    sel   = '0;
    for (int unsigned i = 0; i < N_IN; i++) begin
      int unsigned j;
      j = (int'(rr) + i) % N_IN;
      if (!sel_v && in_valid[j]) begin
        sel_v = 1'b1;
        sel   = LW'(j);
      end
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_data  = in_word[sel];
    in_ready  = '0;
    case (state)
      S_HEADER: begin
        out_valid = 1'b1;
        out_data  = {K_TL_HEADER, gemroc_id, 23'd0, pkt_num};
      end
      S_DATA: if (!close_now && sel_v) begin
        out_valid     = 1'b1;
        in_ready[sel] = out_ready;
      end
      S_TRAILER: begin
        out_valid = 1'b1;
        out_last  = 1'b1;
        out_data  = {K_TL_TRAILER, gemroc_id, 7'd0, 16'(nwords), pkt_num};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rr      <= '0;
      nwords  <= '0;
      nframes <= '0;
      pkt_num <= '0;
    end else begin
      if (frame_tick && nframes != 4'hF) nframes <= nframes + 4'd1;
      case (state)
        S_IDLE: if (enable) state <= S_HEADER;
        S_HEADER: if (out_ready) begin
          state   <= S_DATA;
          nwords  <= '0;
          nframes <= '0;
        end
        S_DATA: begin
          if (close_now) state <= S_TRAILER;
          else if (sel_v && out_ready) begin
            nwords <= nwords + 1'b1;
            rr     <= (int'(sel) == N_IN-1) ? '0 : sel + 1'b1;
          end
        end
        S_TRAILER: if (out_ready) begin
          pkt_num <= pkt_num + 32'd1;
          state   <= enable ? S_HEADER : S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign pkt_count = pkt_num;

endmodule
