// tb_gemdc_event_builder: four ports (three enabled) receive trigger-matched
// packets {header, hits, trailer} at random times, word by word. A reference model in the
// test bench builds the expected event stream (event header, the packets of
// the enabled ports in port order, event trailer with word count and
// mismatch flag) before the packets are sent, since the builder starts
// copying as soon as the headers arrive; the VME side reads it with random
// rd_en. Also checked:
// irq/events_ready, a trigger-number mismatch, the almost_full flag when the
// event buffer is left unread, and port_overflow when a port FIFO overfills.
`timescale 1ns/1ps
module tb_gemdc_event_builder;
  import cgem_pkg::*;
  localparam int NP = 4, PD = 16, ED = 32;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NP-1:0] port_enable, in_valid, in_last, port_overflow;
  logic [63:0]   in_data [NP];
  logic          rd_en, rd_valid, irq, almost_full;
  logic [63:0]   rd_data;
  logic [15:0]   events_ready;
  logic [31:0]   events_built;

  gemdc_event_builder #(.N_PORT(NP), .PORT_DEPTH(PD), .EVB_DEPTH(ED)) dut (
    .clk, .rst_n, .port_enable, .in_valid, .in_data, .in_last, .port_overflow,
    .rd_en, .rd_valid, .rd_data, .irq, .events_ready, .almost_full, .events_built);

  // packets queued per port by the stimulus, for the reference model
  logic [63:0] pkt_q [NP][$];
  logic [63:0] exp_q [$];
  bit          read_on = 1;
  int          nread = 0, n_irq = 0, n_afull = 0;

  function automatic void build_expected(input int ntrig, input logic [NP-1:0] en);
    for (int t = 0; t < ntrig; t++) begin
      logic [23:0] tn;
      logic [15:0] nw;
      bit          mm;
      int          first;
      first = -1; nw = 0; mm = 0;
      for (int p = 0; p < NP; p++) if (en[p] && first < 0) first = p;
      tn = pkt_q[first][0][47:24];
      exp_q.push_back({K_EV_HEADER, 12'd0, tn, 8'd0, 16'(NP)});
      for (int p = 0; p < NP; p++) if (en[p]) begin
        logic [63:0] w;
        bit          done;
        done = 0;
        if (pkt_q[p][0][47:24] != tn) mm = 1;
        while (!done) begin
          w = pkt_q[p].pop_front();
          exp_q.push_back(w);
          nw++;
          if (w[63:60] == K_TM_TRAILER) done = 1;
        end
      end
      exp_q.push_back({K_EV_TRAILER, 11'd0, mm, tn, nw, 8'd0});
    end
  endfunction

  // VME reader and comparison
  always @(negedge clk) rd_en <= rst_n && read_on && ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (rd_en && rd_valid) begin
      logic [63:0] e;
      if (exp_q.size() == 0) check(0, "unexpected word");
      else begin
        e = exp_q.pop_front();
        check(rd_data == e, $sformatf("event word %0d: %h expected %h", nread, rd_data, e));
      end
      nread++;
    end
    if (irq) n_irq++;
    check(irq == (events_ready != 0), "irq follows events_ready");
    if (almost_full) n_afull++;
  end

  // The expected event is worked out before the packets are sent, because the
  // builder starts copying as soon as the headers have arrived.
  logic [63:0] tx_q [NP][$];
  function automatic void make_packet(input int p, input logic [23:0] tn, input int nh);
    logic [63:0] w;
    for (int i = 0; i < nh + 2; i++) begin
      if (i == 0) w = tm_header(5'(p), tn, 16'(tn * 3));
      else if (i == nh + 1) w = tm_trailer(5'(p), tn, 12'(nh), '0);
      else w = {2'b10, 3'(p), 5'd0, 54'({$urandom, $urandom})};
      pkt_q[p].push_back(w);
      tx_q[p].push_back(w);
    end
  endfunction

  task automatic send_port(input int p);
    while (tx_q[p].size() > 0) begin
      logic [63:0] w;
      w = tx_q[p].pop_front();
      @(negedge clk);
      in_valid[p] = 1; in_data[p] = w; in_last[p] = (w[63:60] == K_TM_TRAILER);
      @(negedge clk);
      in_valid[p] = 0; in_last[p] = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  task automatic send_packets(input logic [23:0] tn0, input logic [23:0] tn1, input logic [23:0] tn3, input int nmax);
    make_packet(0, tn0, $urandom_range(0, nmax));
    make_packet(1, tn1, $urandom_range(0, nmax));
    make_packet(3, tn3, $urandom_range(0, nmax));
    build_expected(1, port_enable);
    fork
      send_port(0);
      send_port(1);
      send_port(3);
    join
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    port_enable = 4'b1011; in_valid = 0; in_last = 0;
    for (int p = 0; p < NP; p++) in_data[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1: 20 triggers, ports 0, 1, 3 fed in parallel, each at its own pace
    for (int t = 0; t < 20; t++) begin
      logic [23:0] tn;
      tn = 24'(100 + t);
      send_packets(tn, tn, (t == 7) ? tn + 1 : tn, 3);
      repeat (15) @(negedge clk);  // keep the offered load below the read rate
    end
    repeat (200) @(negedge clk);
    check(exp_q.size() == 0, "all event words read");
    check(events_built == 20, $sformatf("20 events built (%0d)", events_built));
    check(n_irq > 0, "irq raised");
    check(events_ready == 0 && !irq, "irq cleared once all events read");
    check(port_overflow == 0, "no overflow in normal running");
    // 2: buffer left unread: almost_full rises at 3/4 of the event buffer
    read_on = 0;
    repeat (5) @(negedge clk);
    for (int t = 0; t < 4; t++) begin
      make_packet(0, 24'(200 + t), 1);
      make_packet(1, 24'(200 + t), 1);
      make_packet(3, 24'(200 + t), 1);
      build_expected(1, port_enable);
      fork
        send_port(0);
        send_port(1);
        send_port(3);
      join
      repeat (20) @(negedge clk);
    end
    // 4 events x (2 + 3 x 3) = 44 words > 32: buffer full, builder stalls
    check(almost_full, "almost_full with the event buffer left unread");
    check(events_ready >= 2, "events wait in the buffer");
    read_on = 1;
    repeat (300) @(negedge clk);
    check(exp_q.size() == 0, "stalled events read completely");
    check(!almost_full, "almost_full cleared after reading");
    // 3: port 1 overfills while port 0 has no packet
    for (int i = 0; i < PD + 2; i++) begin
      @(negedge clk) in_valid[1] = 1; in_data[1] = 64'(i); in_last[1] = 0;
    end
    @(negedge clk) in_valid[1] = 0;
    check(port_overflow[1] && !port_overflow[0], "port_overflow on the overfilled port");
    check(n_afull > 0, "almost_full seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
