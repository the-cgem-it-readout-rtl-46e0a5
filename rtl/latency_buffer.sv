// latency_buffer: circular, page-organised hit memory of one FEB.
//
// As in the paper, the memory is divided into pages ("buckets") of 32
// locations; a bucket collects the hits of the FEB's two TIGERs whose coarse
// timestamp falls in one interval of 2^8 TIGER clocks (1.53 us), and 16
// buckets make the circle, so the data are overwritten after 2^12 clocks
// (24.6 us) -- much longer than the 8.6 us L1 latency. A hit goes to page
// tcoarse[11:8], at the next free location of that page; a page's fill count
// is cleared when the local time counter 'now' enters that page's interval
// again, which recycles the page. A hit that finds its page full is dropped
// and flagged on 'overflow'. Frame and counter words are not stored.
//
// Read side: the trigger-matching engine puts a page and location on
// rd_page/rd_idx and gets the word on rd_data one clock later; page_fill gives
// the current fill count of rd_page combinationally. The memory is a simple
// dual-port RAM (one write, one read port).
module latency_buffer #(
  parameter int unsigned N_PAGES    = 16,
  parameter int unsigned PAGE_LOC   = 32,
  parameter int unsigned PAGE_CYC_W = 8    // log2 clocks per page
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [15:0]                  now,
  input  logic                         wr_valid,
  input  logic [63:0]                  wr_word,
  output logic                         overflow,
  input  logic [$clog2(N_PAGES)-1:0]   rd_page,
  input  logic [$clog2(PAGE_LOC)-1:0]  rd_idx,
  output logic [63:0]                  rd_data,
  output logic [$clog2(PAGE_LOC):0]    page_fill
);
  import cgem_pkg::*;

  localparam int unsigned PW = $clog2(N_PAGES);
  localparam int unsigned IW = $clog2(PAGE_LOC);

  logic [63:0] mem [N_PAGES*PAGE_LOC];
  logic [IW:0] fill [N_PAGES];

  tiger_word_t w;
  logic [PW-1:0] wpage, npage;
  logic          is_hit, page_start;

  always_comb begin
    w          = tiger_word_t'(wr_word);
    is_hit     = (w.wtype == TW_HIT);
    wpage      = w.hit.tcoarse[PAGE_CYC_W +: PW];
    npage      = now[PAGE_CYC_W +: PW];
    page_start = (now[PAGE_CYC_W-1:0] == '0);
  end

  wire [IW:0] wfill = (page_start && wpage == npage) ? '0 : fill[wpage];
  wire        do_wr = wr_valid && is_hit && (wfill != (IW+1)'(PAGE_LOC));

  always_ff @(posedge clk) begin
    if (do_wr) mem[{wpage, wfill[IW-1:0]}] <= wr_word;
    rd_data <= mem[{rd_page, rd_idx}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PAGES; i++) fill[i] <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_valid && is_hit && !do_wr;
      if (page_start) fill[npage] <= '0;
      if (do_wr) fill[wpage] <= wfill + 1'b1;
    end
  end

  assign page_fill = fill[rd_page];

endmodule
