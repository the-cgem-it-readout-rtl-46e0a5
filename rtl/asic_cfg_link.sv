// asic_cfg_link: SPI-like configuration link from the GEMROC to the two
// TIGERs of one FEB.
//
// The paper programs the TIGER registers over a 10 MHz SPI-like link. This
// master shifts a FRAME_W-bit command frame out on mosi, MSB first, while it
// samples miso on each rising sclk edge, so the TIGER's reply frame is
// captured at the same time; cs_n[tiger] is low for the whole frame. sclk is
// the 166.6 MHz clock divided by 2*HALF_DIV (default 18: 9.3 MHz, under the
// 10 MHz limit). mosi changes on the falling edge (SPI mode 0). The frame
// length and the mode are this design's choices; the TIGER register map and
// command set are not described.
//
// Interface: cmd_valid/cmd_ready hand over {cmd_tiger, cmd_data}; rsp_valid
// pulses with rsp_data when the frame is complete.
module asic_cfg_link #(
  parameter int unsigned FRAME_W  = 32,
  parameter int unsigned HALF_DIV = 9,
  parameter int unsigned N_TIGER  = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  input  logic [$clog2(N_TIGER)-1:0]  cmd_tiger,
  input  logic [FRAME_W-1:0]          cmd_data,
  output logic                        cmd_ready,
  output logic                        rsp_valid,
  output logic [FRAME_W-1:0]          rsp_data,
  output logic                        sclk,
  output logic                        mosi,
  output logic [N_TIGER-1:0]          cs_n,
  input  logic                        miso
);
  localparam int unsigned DW = $clog2(HALF_DIV + 1);
  localparam int unsigned BW = $clog2(FRAME_W + 1);

  logic               active;
  logic [DW-1:0]      div;
  logic [BW-1:0]      nbits;
  logic [FRAME_W-1:0] tx, rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      div       <= '0;
      nbits     <= '0;
      tx        <= '0;
      rx        <= '0;
      sclk      <= 1'b0;
      mosi      <= 1'b0;
      cs_n      <= '1;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (!active) begin
        if (cmd_valid) begin
          active          <= 1'b1;
          cs_n[cmd_tiger] <= 1'b0;
          tx              <= {cmd_data[FRAME_W-2:0], 1'b0};
          mosi            <= cmd_data[FRAME_W-1];
          nbits           <= '0;
          div             <= '0;
          sclk            <= 1'b0;
        end
      end else if (int'(div) == HALF_DIV - 1) begin
        div  <= '0;
        if (!sclk) begin
          // rising edge: sample miso
          sclk  <= 1'b1;
          rx    <= {rx[FRAME_W-2:0], miso};
          nbits <= nbits + 1'b1;
        end else begin
          // falling edge: next bit, or end of frame
          sclk <= 1'b0;
          if (int'(nbits) == FRAME_W) begin
            active    <= 1'b0;
            cs_n      <= '1;
            rsp_valid <= 1'b1;
            rsp_data  <= rx;
          end else begin
            mosi <= tx[FRAME_W-1];
            tx   <= {tx[FRAME_W-2:0], 1'b0};
          end
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  assign cmd_ready = !active;

endmodule
