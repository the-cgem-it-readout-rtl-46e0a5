// tiger_link_rx: receiver for one TIGER LVDS output data link.
//
// The TIGER sends its 8b/10b-encoded data at 332 Mb/s, i.e. double data rate
// on the 166.6 MHz TIGER clock, so the FPGA input cell delivers two line bits
// per clock (ddr_bits[1] first). The receiver shifts these into a register and
// hunts for the K28.5 comma at either bit offset; when found it locks its
// symbol phase and from then on takes one 10-bit symbol every 5 clocks. A
// comma seen at another phase while locked re-aligns the receiver. Each symbol
// is decoded with running-disparity checking (code8b10b_pkg).
//
// Framing (this design's choice; the paper does not describe the TIGER link
// protocol): K28.5 fills the line between words and every TIGER word is sent
// as 8 data bytes, most significant byte first. A control symbol or a decoding
// error inside a word discards that word. The receiver writes its TIGER number
// (parameter TIGER_ID) into bits [61:59] of each word it delivers.
//
// Outputs: word_valid pulses for one clock with word; err pulses on every
// decoding or framing error (the 8b/10b error detection the paper uses to spot
// link problems); err_count saturates.
module tiger_link_rx #(
  parameter logic [2:0] TIGER_ID = 3'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  ddr_bits,
  output logic        locked,
  output logic        word_valid,
  output logic [63:0] word,
  output logic        err,
  output logic [15:0] err_count
);
  import code8b10b_pkg::*;

  localparam logic [9:0] COMMA_N = 10'b0011111010;  // K28.5, RD-
  localparam logic [9:0] COMMA_P = 10'b1100000101;  // K28.5, RD+

  logic [10:0] sr;          // newest bit at sr[0]
  logic        phase;       // 0: symbol ends at sr[0]; 1: at sr[1]
  logic [2:0]  cnt;         // clock count within a 5-clock symbol slot
  logic        rd;
  logic [2:0]  nbytes;      // data bytes collected in the current word
  logic        word_bad;
  logic [55:0] acc;

  logic [10:0] sr_n;
  logic [9:0]  w0, w1, sym;
  logic        c0, c1, sym_strobe;
  dec_t        d;

  always_comb begin
    sr_n = {sr[8:0], ddr_bits};
    w0   = sr_n[9:0];
    w1   = sr_n[10:1];
    c0   = (w0 == COMMA_N) || (w0 == COMMA_P);
    c1   = (w1 == COMMA_N) || (w1 == COMMA_P);
    // A comma at either offset (re)defines the symbol boundary.
    sym_strobe = c0 || c1 || (locked && cnt == 3'd4);
    sym        = c0 ? w0 : c1 ? w1 : (phase ? w1 : w0);
    d = dec8b10b(sym, (sym == COMMA_P) ? 1'b1 : (sym == COMMA_N) ? 1'b0 : rd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr         <= '0;
      phase      <= 1'b0;
      cnt        <= '0;
      locked     <= 1'b0;
      rd         <= 1'b0;
      nbytes     <= '0;
      word_bad   <= 1'b0;
      acc        <= '0;
      word_valid <= 1'b0;
      word       <= '0;
      err        <= 1'b0;
      err_count  <= '0;
    end else begin
      sr         <= sr_n;
      word_valid <= 1'b0;
      err        <= 1'b0;
      cnt        <= (cnt == 3'd4) ? 3'd0 : cnt + 3'd1;
      // Comma alignment: a comma restarts the 5-clock slot at its phase.
      if (c0) begin
        locked <= 1'b1; phase <= 1'b0; cnt <= 3'd0;
      end else if (c1) begin
        locked <= 1'b1; phase <= 1'b1; cnt <= 3'd0;
      end
      if (sym_strobe) begin
        rd <= d.rd;
        if (d.code_err || d.disp_err) begin
          err      <= 1'b1;
          word_bad <= (nbytes != 3'd0);
          if (err_count != 16'hFFFF) err_count <= err_count + 16'd1;
        end else if (d.k) begin
          // Control symbol: ends any partial word.
          if (nbytes != 3'd0) begin
            err <= 1'b1;
            if (err_count != 16'hFFFF) err_count <= err_count + 16'd1;
          end
          nbytes   <= '0;
          word_bad <= 1'b0;
        end else begin
          if (nbytes == 3'd7) begin
            if (!word_bad) begin
              word_valid <= 1'b1;
              word       <= {acc[55:54], TIGER_ID, acc[50:0], d.data};
            end
            nbytes   <= '0;
            word_bad <= 1'b0;
          end else begin
            acc    <= {acc[47:0], d.data};
            nbytes <= nbytes + 3'd1;
          end
        end
      end
    end
  end

endmodule
