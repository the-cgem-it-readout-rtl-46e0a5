// sync_fifo: single-clock first-word-fall-through FIFO, used as the rate-
// levelling FIFOs, the trigger queue and the GEM-DC port and event buffers.
// rd_data shows the oldest entry whenever empty is low; rd_en pops it. A write
// when full is ignored (the caller checks full). level counts stored entries.
// DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  assign level   = wptr - rptr;
  assign empty   = (wptr == rptr);
  assign full    = (level == (AW+1)'(DEPTH));
  assign rd_data = mem[rptr[AW-1:0]];

endmodule
