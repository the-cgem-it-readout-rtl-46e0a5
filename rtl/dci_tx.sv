// dci_tx: Data Collector Interface, GEMROC side of the optical link to the
// GEM-DC.
//
// Trigger-matched packets (64-bit words, valid/ready, last on the trailer)
// are turned into a stream of 8b/10b symbols for the 2 Gb/s transceiver, one
// symbol per clock in which sym_en is high. Between packets the line carries
// the K28.5 comma. A packet is sent as K27.7 (start), then each word as 8 data
// bytes, most significant byte first, then K29.7 (end). If the next word of a
// packet is not yet available the comma is inserted as filler. The running
// disparity is kept across symbols.
//
// The paper gives the link rate (2 Gb/s, 8b/10b, 1.6 Gb/s net) and that
// packets travel on it; the framing characters are this design's choice.
module dci_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] in_data,
  input  logic        in_last,
  output logic        in_ready,
  input  logic        sym_en,
  output logic [9:0]  sym,
  output logic        in_packet
);
  import code8b10b_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_BYTES, S_EOP} state_e;
  state_e      state;
  logic [63:0] sh;
  logic        sh_last, sh_v;
  logic [2:0]  bidx;
  logic        rd;
  logic [7:0]  b;
  logic        k;
  enc_t        e;

  // A new word is taken when none is being sent or the last byte goes out now.
  always_comb begin
    in_ready = 1'b0;
    b = K28_5;
    k = 1'b1;
    case (state)
      S_IDLE: begin
        in_ready = 1'b0;
        if (in_valid) b = K27_7;
      end
      S_BYTES: begin
        if (sh_v) begin
          b = sh[63:56];
          k = 1'b0;
          in_ready = sym_en && (bidx == 3'd7) && !sh_last;
        end else begin
          in_ready = sym_en;
        end
      end
      S_EOP: b = K29_7;
      default: ;
    endcase
    e = enc8b10b(b, k, rd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sh      <= '0;
      sh_v    <= 1'b0;
      sh_last <= 1'b0;
      bidx    <= '0;
      rd      <= 1'b1;            // the reset symbol, K28.5 RD-, leaves RD+
      sym     <= 10'b0011111010;
    end else if (sym_en) begin
      sym <= e.sym;
      rd  <= e.rd;
      case (state)
        S_IDLE: if (in_valid) begin
          state <= S_BYTES;
          sh_v  <= 1'b0;
        end
        S_BYTES: begin
          if (sh_v) begin
            sh   <= {sh[55:0], 8'h00};
            bidx <= bidx + 3'd1;
            if (bidx == 3'd7) begin
              sh_v <= 1'b0;
              if (sh_last) state <= S_EOP;
            end
          end
          if (in_valid && in_ready) begin
            sh      <= in_data;
            sh_last <= in_last;
            sh_v    <= 1'b1;
            bidx    <= '0;
          end
        end
        S_EOP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_packet = (state != S_IDLE);

endmodule
