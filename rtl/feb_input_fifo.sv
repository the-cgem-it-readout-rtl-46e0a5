// feb_input_fifo: rate-levelling input FIFO of one front-end board (FEB).
//
// A FEB carries two TIGERs, each driving two data links, so four link
// receivers feed this block. Every link word is first held in a one-word
// register of its own; a round-robin arbiter moves one held word per clock
// into a FIFO that smooths the bursty arrival rate for the latency buffer or
// the trigger-less merger downstream. A link delivers at most one word every
// 40 clocks, so the arbiter (at most NLINK clocks per round) keeps up; a word
// that finds its holding register still occupied, or the FIFO full, is
// dropped and reported on 'drop'. Words from a TIGER whose enable bit is low
// are discarded at the input.
//
// The paper places one such FIFO per FEB for the data of its pair of TIGERs;
// the holding registers, the arbitration and the FIFO depth are this
// design's choices. Output is a valid/ready stream (out_valid, out_ready).
module feb_input_fifo #(
  parameter int unsigned NLINK = 4,       // 2 TIGERs x 2 links
  parameter int unsigned DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NLINK-1:0]  in_valid,
  input  logic [63:0]       in_word [NLINK],
  input  logic [NLINK-1:0]  link_enable,
  output logic              out_valid,
  output logic [63:0]       out_word,
  input  logic              out_ready,
  output logic              drop,
  output logic              almost_full
);
  localparam int unsigned LW = (NLINK > 1) ? $clog2(NLINK) : 1;

  logic [NLINK-1:0] hold_v;
  logic [63:0]      hold_w [NLINK];
  logic [LW-1:0]    rr;           // next link to look at first
  logic             grant_v;
  logic [LW-1:0]    grant;
  logic             fifo_full, fifo_empty;
  logic [$clog2(DEPTH):0] level;

  always_comb begin
    grant_v = 1'b0;
    grant   = '0;
    for (int unsigned i = 0; i < NLINK; i++) begin
      int unsigned j;
      j = (int'(rr) + i) % NLINK;
      if (!grant_v && hold_v[j]) begin
        grant_v = 1'b1;
        grant   = LW'(j);
      end
    end
  end

  wire push = grant_v && !fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v <= '0;
      rr     <= '0;
      drop   <= 1'b0;
      for (int i = 0; i < NLINK; i++) hold_w[i] <= '0;
    end else begin
      drop <= 1'b0;
      if (push) begin
        hold_v[grant] <= 1'b0;
        rr <= (int'(grant) == NLINK-1) ? '0 : grant + 1'b1;
      end
      for (int i = 0; i < NLINK; i++) begin
        if (in_valid[i] && link_enable[i]) begin
          if (hold_v[i] && !(push && grant == LW'(i))) drop <= 1'b1;
          else begin
            hold_v[i] <= 1'b1;
            hold_w[i] <= in_word[i];
          end
        end
      end
    end
  end

  sync_fifo #(.WIDTH(64), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(push), .wr_data(hold_w[grant]),
    .rd_en(out_valid && out_ready), .rd_data(out_word),
    .empty(fifo_empty), .full(fifo_full), .level(level)
  );

  assign out_valid   = !fifo_empty;
  assign almost_full = (level >= ($clog2(DEPTH)+1)'(DEPTH - DEPTH/4));

endmodule
