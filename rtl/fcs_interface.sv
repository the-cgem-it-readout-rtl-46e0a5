// fcs_interface: GEMROC side of the BESIII Fast Control System.
//
// L1 trigger: the BESIII L1 line is high for 8 BESIII clocks (32 TIGER
// clocks). After a two-flop synchroniser the rising edge is taken as the
// trigger; the block numbers the triggers (0, 1, 2, ...) and logs the
// time-of-arrival timestamp, the value of the local coarse-time counter 'now'
// at detection, into a trigger queue read by the trigger-matching engine
// (first-word-fall-through: trig_valid/trig_num/trig_ts, trig_pop). A trigger
// that finds the queue full is lost and flagged on trig_lost.
//
// Check: BESIII sends a Check pulse every 256 L1 triggers. At each Check edge
// the block expects the number of triggers received so far to be a multiple
// of 256 and otherwise pulses check_error.
//
// Full: full_out is raised while the trigger queue holds FULL_LEVEL or more
// triggers waiting for readout; BESIII then stops sending triggers.
//
// Signal meanings follow the paper. The queue depth, full level, the
// numbering and the exact check rule are this design's choices.
module fcs_interface #(
  parameter int unsigned Q_DEPTH    = 8,
  parameter int unsigned FULL_LEVEL = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [15:0]  now,
  input  logic         l1_in,
  input  logic         check_in,
  output logic         trig_valid,
  output logic [23:0]  trig_num,
  output logic [15:0]  trig_ts,
  input  logic         trig_pop,
  output logic         trig_lost,
  output logic         check_error,
  output logic         full_out,
  output logic [23:0]  trig_count
);
  logic [2:0] l1_s, ck_s;   // synchroniser + edge detector
  logic       q_empty, q_full;
  logic [$clog2(Q_DEPTH):0] q_level;
  logic [39:0] q_out;

  wire l1_edge = l1_s[1] && !l1_s[2];
  wire ck_edge = ck_s[1] && !ck_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_s        <= '0;
      ck_s        <= '0;
      trig_count  <= '0;
      trig_lost   <= 1'b0;
      check_error <= 1'b0;
    end else begin
      l1_s        <= {l1_s[1:0], l1_in};
      ck_s        <= {ck_s[1:0], check_in};
      trig_lost   <= l1_edge && q_full;
      check_error <= ck_edge && (trig_count[7:0] != 8'd0);
      if (l1_edge) trig_count <= trig_count + 24'd1;
    end
  end

  sync_fifo #(.WIDTH(40), .DEPTH(Q_DEPTH)) u_q (
    .clk, .rst_n,
    .wr_en(l1_edge), .wr_data({trig_count, now}),
    .rd_en(trig_pop), .rd_data(q_out),
    .empty(q_empty), .full(q_full), .level(q_level)
  );

  assign trig_valid = !q_empty;
  assign trig_num   = q_out[39:16];
  assign trig_ts    = q_out[15:0];
  assign full_out   = (q_level >= ($clog2(Q_DEPTH)+1)'(FULL_LEVEL));

endmodule
