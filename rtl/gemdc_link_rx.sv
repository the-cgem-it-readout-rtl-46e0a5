// gemdc_link_rx: GEM-DC optical input port.
//
// Takes the 10-bit symbols of one GEMROC link (one per clock with sym_valid)
// from the transceiver, decodes them with running-disparity checking and
// rebuilds the packet words sent by dci_tx: K27.7 opens a packet, 8 data bytes
// make one 64-bit word (MSB first), K29.7 closes it, K28.5 is idle/filler.
// Each word is held until the next one completes, so that the word preceding
// K29.7 can be flagged out_last. Words stream out as soon as they are
// complete, so the event builder can start on a packet while it arrives, as
// the paper notes. A decoding error, or a packet that ends inside a word,
// pulses err; the partial word is dropped.
module gemdc_link_rx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sym_valid,
  input  logic [9:0]  sym,
  output logic        out_valid,
  output logic [63:0] out_data,
  output logic        out_last,
  output logic        err
);
  import code8b10b_pkg::*;

  logic        rd, in_pkt, pend_v;
  logic [2:0]  nbytes;
  logic [55:0] acc;
  logic [63:0] pend;
  dec_t        d;

  always_comb d = dec8b10b(sym, rd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd        <= 1'b0;
      in_pkt    <= 1'b0;
      pend_v    <= 1'b0;
      nbytes    <= '0;
      acc       <= '0;
      pend      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      err       <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      err       <= 1'b0;
      if (sym_valid) begin
        rd <= d.rd;
        if (d.code_err || d.disp_err) begin
          err <= 1'b1;
          // resynchronise the disparity on the symbol's own balance
          rd  <= d.rd;
        end else if (d.k) begin
          if (d.data == K27_7) begin
            in_pkt <= 1'b1;
            nbytes <= '0;
            pend_v <= 1'b0;
          end else if (d.data == K29_7 && in_pkt) begin
            in_pkt <= 1'b0;
            if (nbytes != 3'd0) err <= 1'b1;
            if (pend_v) begin
              out_valid <= 1'b1;
              out_data  <= pend;
              out_last  <= 1'b1;
            end
            pend_v <= 1'b0;
            nbytes <= '0;
          end
        end else if (in_pkt) begin
          if (nbytes == 3'd7) begin
            if (pend_v) begin
              out_valid <= 1'b1;
              out_data  <= pend;
            end
            pend   <= {acc, d.data};
            pend_v <= 1'b1;
            nbytes <= '0;
          end else begin
            acc    <= {acc[47:0], d.data};
            nbytes <= nbytes + 3'd1;
          end
        end
      end
    end
  end

endmodule
