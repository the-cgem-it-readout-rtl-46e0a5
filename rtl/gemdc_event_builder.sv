// gemdc_event_builder: event building in a GEM Data Concentrator (GEM-DC).
//
// Each of the N_PORT optical input ports delivers the trigger-matched packets
// of one GEMROC into a FIFO (PORT_DEPTH words). As the paper describes,
// processing overlaps reception: as soon as every enabled port holds the
// header of its next packet, the builder writes into the event buffer an event header
// {event kind, trigger number, number of ports}, then the packets of the
// enabled ports in port order, then an event trailer {trigger number, word
// count, mismatch flag}. The trigger number is taken from the header of the
// first enabled port; a port whose packet carries another trigger number sets
// the mismatch flag (the event is still built). One word moves per clock while
// the event buffer has room and the current port has its next word; a port
// whose packet is still arriving stalls the copy. 'irq' is high while at least one complete event
// waits in the buffer; the VME side pops words with rd_en (first-word-fall-
// through rd_data/rd_valid). almost_full (buffer three quarters full) is meant
// for the BESIII Full line. A word that finds its port FIFO full is dropped
// and sets port_overflow.
//
// The paper gives the function (events assembled by common trigger number,
// VME interrupt to the crate CPU); buffer sizes, ordering and word layout are
// this design's choices.
module gemdc_event_builder #(
  parameter int unsigned N_PORT     = 16,
  parameter int unsigned PORT_DEPTH = 512,
  parameter int unsigned EVB_DEPTH  = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORT-1:0]  port_enable,
  input  logic [N_PORT-1:0]  in_valid,
  input  logic [63:0]        in_data [N_PORT],
  input  logic [N_PORT-1:0]  in_last,
  output logic [N_PORT-1:0]  port_overflow,
  // VME read side
  input  logic               rd_en,
  output logic               rd_valid,
  output logic [63:0]        rd_data,
  output logic               irq,
  output logic [15:0]        events_ready,
  output logic               almost_full,
  output logic [31:0]        events_built
);
  import cgem_pkg::*;

  localparam int unsigned PW  = (N_PORT > 1) ? $clog2(N_PORT) : 1;

  logic [64:0]     pq_out   [N_PORT];
  logic [N_PORT-1:0] pq_empty, pq_full, pq_rd;

  typedef enum logic [2:0] {S_IDLE, S_HEADER, S_COPY, S_NEXT, S_TRAILER} state_e;
  state_e state;

  logic [PW-1:0]  port;
  logic [23:0]    ev_tnum;
  logic [15:0]    ev_words;
  logic           mismatch;
  logic           first_word;

  logic [N_PORT-1:0] ready_ports;
  logic              all_ready;
  logic [PW-1:0]     first_port, next_port;
  logic              next_v;
  logic              evb_full, evb_empty;
  logic              evb_wr;
  logic [64:0]       evb_din, evb_dout;
  logic [$clog2(EVB_DEPTH):0] evb_level;

  for (genvar p = 0; p < N_PORT; p++) begin : g_port
    wire wr = in_valid[p] && port_enable[p];
    sync_fifo #(.WIDTH(65), .DEPTH(PORT_DEPTH)) u_pq (
      .clk, .rst_n,
      .wr_en(wr), .wr_data({in_last[p], in_data[p]}),
      .rd_en(pq_rd[p]), .rd_data(pq_out[p]),
      .empty(pq_empty[p]), .full(pq_full[p]), .level()
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                  port_overflow[p] <= 1'b0;
      else if (wr && pq_full[p])   port_overflow[p] <= 1'b1;
    end
    // a non-empty port FIFO between events holds the header of its next packet
    assign ready_ports[p] = !port_enable[p] || !pq_empty[p];
  end

  always_comb begin
    all_ready  = (&ready_ports) && (port_enable != '0);
    first_port = '0;
    for (int p = N_PORT-1; p >= 0; p--) if (port_enable[p]) first_port = PW'(p);
    next_v    = 1'b0;
    next_port = '0;
    for (int p = N_PORT-1; p >= 0; p--)
      if (p > int'(port) && port_enable[p]) begin
        next_v    = 1'b1;
        next_port = PW'(p);
      end
  end

  // Data path: what is written into the event buffer this clock.
  always_comb begin
    evb_wr  = 1'b0;
    evb_din = '0;
    pq_rd   = '0;
    case (state)
      S_HEADER: begin
        evb_wr  = !evb_full;
        evb_din = {1'b0, K_EV_HEADER, 12'd0, pq_out[first_port][47:24], 8'd0, 16'(N_PORT)};
      end
      S_COPY: if (!evb_full && !pq_empty[port]) begin
        evb_wr      = 1'b1;
        evb_din     = {1'b0, pq_out[port][63:0]};
        pq_rd[port] = 1'b1;
      end
      S_TRAILER: begin
        evb_wr  = !evb_full;
        evb_din = {1'b1, K_EV_TRAILER, 11'd0, mismatch, ev_tnum, ev_words, 8'd0};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      port         <= '0;
      ev_tnum      <= '0;
      ev_words     <= '0;
      mismatch     <= 1'b0;
      first_word   <= 1'b0;
      events_built <= '0;
    end else begin
      case (state)
        S_IDLE: if (all_ready) begin
          ev_tnum  <= pq_out[first_port][47:24];
          ev_words <= '0;
          mismatch <= 1'b0;
          port     <= first_port;
          state    <= S_HEADER;
        end
        S_HEADER: if (!evb_full) begin
          state      <= S_COPY;
          first_word <= 1'b1;
        end
        S_COPY: if (!evb_full && !pq_empty[port]) begin
          first_word <= 1'b0;
          ev_words   <= ev_words + 16'd1;
          if (first_word && pq_out[port][47:24] != ev_tnum) mismatch <= 1'b1;
          if (pq_out[port][64]) state <= S_NEXT;
        end
        S_NEXT: begin
          // the next enabled port follows without a new header
          first_word <= 1'b1;
          if (next_v) begin
            port  <= next_port;
            state <= S_COPY;
          end else state <= S_TRAILER;
        end
        S_TRAILER: if (!evb_full) begin
          state        <= S_IDLE;
          events_built <= events_built + 32'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  sync_fifo #(.WIDTH(65), .DEPTH(EVB_DEPTH)) u_evb (
    .clk, .rst_n,
    .wr_en(evb_wr), .wr_data(evb_din),
    .rd_en(rd_en), .rd_data(evb_dout),
    .empty(evb_empty), .full(evb_full), .level(evb_level)
  );

  // complete events waiting in the buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) events_ready <= '0;
    else begin
      case ({evb_wr && !evb_full && evb_din[64], rd_en && !evb_empty && evb_dout[64]})
        2'b10:   events_ready <= events_ready + 16'd1;
        2'b01:   events_ready <= events_ready - 16'd1;
        default: ;
      endcase
    end
  end

  assign rd_valid = !evb_empty;
  assign rd_data  = evb_dout[63:0];
  assign irq      = (events_ready != 16'd0);
  assign almost_full = (evb_level >= ($clog2(EVB_DEPTH)+1)'(EVB_DEPTH - EVB_DEPTH/4));

endmodule
