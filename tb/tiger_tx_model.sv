// tiger_tx_model: behavioural model of one TIGER output data link, for test
// benches only. Words queued with send_word() leave as 8 data bytes (MSB
// first), 8b/10b encoded, two line bits per clock (first bit in ddr_bits[1]),
// so one 10-bit symbol takes 5 clocks (332 Mb/s at 166.6 MHz). When nothing
// is queued the K28.5 comma is sent. send_bad_word() replaces one byte of a word by an
// invalid symbol to emulate a transmission error.
`timescale 1ns/1ps
module tiger_tx_model (
  input  logic       clk,
  input  logic       rst_n,
  output logic [1:0] ddr_bits
);
  import code8b10b_pkg::*;

  logic [9:0] q[$];       // {corrupt, k, byte}
  logic [9:0] cur;
  int         pos;
  logic       rd;

  task automatic send_word(input logic [63:0] w);
    for (int b = 7; b >= 0; b--) q.push_back({2'b00, w[8*b +: 8]});
  endtask

  // Queue a word whose byte number 'bad' (0 = first) is replaced on the line
  // by an invalid symbol.
  task automatic send_bad_word(input logic [63:0] w, input int bad);
    for (int b = 7; b >= 0; b--) q.push_back({(7 - b) == bad, 1'b0, w[8*b +: 8]});
  endtask

  task automatic send_k(input logic [7:0] k);
    q.push_back({2'b01, k});
  endtask

  function automatic int pending();
    return q.size();
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      pos      <= 0;
      rd       = 1'b0;
      cur      = 10'b0011111010;
      ddr_bits <= 2'b00;
    end else begin
      if (pos == 0) begin
        logic [9:0] s;
        enc_t       e;
        s = (q.size() > 0) ? q.pop_front() : {2'b01, K28_5};
        e = enc8b10b(s[7:0], s[8], rd);
        rd  = e.rd;
        cur = e.sym;
        if (s[9]) cur = 10'b0000000000;
      end
      ddr_bits <= {cur[9 - 2*pos], cur[8 - 2*pos]};
      pos      <= (pos == 4) ? 0 : pos + 1;
    end
  end
endmodule
