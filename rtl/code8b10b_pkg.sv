// code8b10b_pkg: the standard Widmer-Franaszek 8b/10b line code, used on the
// TIGER output links and on the GEMROC to GEM-DC optical links.
//
// A 10-bit symbol is held as {a,b,c,d,e,i,f,g,h,j}: bit 9 is 'a', the first
// bit on the wire. enc8b10b() returns the symbol for a byte (or a control
// character when k is set) under the current running disparity and the new
// running disparity (rd = 1 means positive). dec8b10b() splits a symbol into
// its 6b and 4b sub-blocks, decodes each with the inverse of the same tables
// and checks that each sub-block is legal for the running disparity it meets.
// Only the control characters used here are recognised: K28.1, K28.5 (comma),
// K27.7, K29.7 and all other K28.y. Both functions are pure logic.
package code8b10b_pkg;

  localparam logic [7:0] K28_1 = 8'h3C;
  localparam logic [7:0] K28_5 = 8'hBC;   // comma / idle
  localparam logic [7:0] K27_7 = 8'hFB;   // start of packet
  localparam logic [7:0] K29_7 = 8'hFD;   // end of packet

  // RD- form of the 5b/6b code (abcdei).
  function automatic logic [5:0] tbl6(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // RD- form of the 3b/4b code (fghj); y = 7 gives the primary P7 code.
  function automatic logic [3:0] tbl4(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  function automatic int unsigned ones6(input logic [5:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]) + int'(v[4]) + int'(v[5]);
  endfunction

  function automatic int unsigned ones4(input logic [3:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]);
  endfunction

  typedef struct packed {
    logic [9:0] sym;
    logic       rd;
  } enc_t;

  function automatic enc_t enc8b10b(input logic [7:0] b, input logic k, input logic rd);
    enc_t        r;
    logic [4:0]  x;
    logic [2:0]  y;
    logic [5:0]  c6;
    logic [3:0]  c4;
    logic        rdm;
    logic        use_a7;
    x = b[4:0];
    y = b[7:5];
    if (k && x == 5'd28) c6 = 6'b001111;
    else                 c6 = tbl6(x);
    if (ones6(c6) != 3 || x == 5'd7) c6 = rd ? ~c6 : c6;
    rdm = (ones6(c6) == 3) ? rd : (ones6(c6) > 3);
    use_a7 = (y == 3'd7) && (k ||
             (!rdm && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
             ( rdm && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    c4 = use_a7 ? 4'b0111 : tbl4(y);
    if (k && x == 5'd28) begin
      // K28.y: RD- form follows the usual rule after 001111, the RD+ form is
      // the complement of the whole RD- symbol.
      if (ones4(c4) != 2 || y == 3'd3) c4 = ~c4;
      if (rd) c4 = ~c4;
    end else if (ones4(c4) != 2 || y == 3'd3) c4 = rdm ? ~c4 : c4;
    r.sym = {c6, c4};
    r.rd  = (ones4(c4) == 2) ? rdm : (ones4(c4) > 2);
    return r;
  endfunction

  typedef struct packed {
    logic [7:0] data;
    logic       k;
    logic       code_err;   // not a valid sub-block
    logic       disp_err;   // valid sub-block met the wrong running disparity
    logic       rd;         // running disparity after the symbol
  } dec_t;

  function automatic dec_t dec8b10b(input logic [9:0] sym, input logic rd);
    dec_t        r;
    logic [5:0]  c6;
    logic [3:0]  c4;
    logic [4:0]  x;
    logic [2:0]  y;
    logic        ok6, ok4, k28, rdm;
    c6 = sym[9:4];
    c4 = sym[3:0];
    x = '0; y = '0; ok6 = 1'b0; ok4 = 1'b0;
    k28 = (c6 == 6'b001111) || (c6 == 6'b110000);
    r.disp_err = 1'b0;
    if (k28) begin
      x = 5'd28; ok6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        logic [5:0] t;
        t = tbl6(5'(i));
        if (c6 == t || ((ones6(t) != 3 || i == 7) && c6 == ~t)) begin
          x = 5'(i); ok6 = 1'b1;
        end
      end
    end
    // 6b disparity rule: +2 only after RD-, -2 only after RD+.
    if (ones6(c6) > 3 && rd)  r.disp_err = 1'b1;
    if (ones6(c6) < 3 && !rd) r.disp_err = 1'b1;
    if (c6 == 6'b111000 && rd)  r.disp_err = 1'b1;
    if (c6 == 6'b000111 && !rd) r.disp_err = 1'b1;
    rdm = (ones6(c6) == 3) ? rd : (ones6(c6) > 3);
    // K28.y in its RD+ form has both sub-blocks complemented.
    if (c6 == 6'b110000) c4 = ~c4;
    case (c4)
      4'b1011, 4'b0100: begin y = 3'd0; ok4 = 1'b1; end
      4'b1001:          begin y = 3'd1; ok4 = 1'b1; end
      4'b0101:          begin y = 3'd2; ok4 = 1'b1; end
      4'b1100, 4'b0011: begin y = 3'd3; ok4 = 1'b1; end
      4'b1101, 4'b0010: begin y = 3'd4; ok4 = 1'b1; end
      4'b1010:          begin y = 3'd5; ok4 = 1'b1; end
      4'b0110:          begin y = 3'd6; ok4 = 1'b1; end
      4'b1110, 4'b0001, 4'b0111, 4'b1000: begin y = 3'd7; ok4 = 1'b1; end
      default: ;
    endcase
    c4 = sym[3:0];
    if (!k28) begin
      if (ones4(c4) > 2 && rdm)  r.disp_err = 1'b1;
      if (ones4(c4) < 2 && !rdm) r.disp_err = 1'b1;
      if (c4 == 4'b1100 && rdm)  r.disp_err = 1'b1;
      if (c4 == 4'b0011 && !rdm) r.disp_err = 1'b1;
    end
    r.rd       = (ones4(c4) == 2) ? rdm : (ones4(c4) > 2);
    r.k        = k28 || ((c4 == 4'b1000 || c4 == 4'b0111) &&
                         (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30));
    r.code_err = !(ok6 && ok4);
    r.data     = {y, x};
    return r;
  endfunction

endpackage
