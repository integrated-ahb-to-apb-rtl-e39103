// spi_slave -- SPI slave (mode 0) that receives the 100-bit command frame and
// returns the result frame, oversampled in the Hclk domain.
//
// SCLK, CSn and MOSI are asynchronous to clk. Each goes through a two-flop
// synchroniser and SCLK/CSn edges are found by comparing the synchronised
// value with the one a cycle older. While CSn is low:
//   * on each SCLK rising edge the synchronised MOSI bit is handed to Mapper1
//     as data_from_slave with a one-cycle bit_valid strobe (MSB first), until
//     FRAME_BITS bits have been taken; further bits in the frame are ignored;
//   * on each SCLK falling edge shift_out asks Mapper2 for its next result bit,
//     which is driven on MISO (data_from_mapper) for the master to sample on
//     the next rising edge.
// A falling CSn starts a frame: the bit count is cleared, start_transaction
// drops and frame_start (one cycle) tells Mapper2 to load a fresh result
// frame. The cycle after the last of the FRAME_BITS bits, frame_done pulses
// (Mapper1 latches the frame) and start_transaction rises and stays high
// until the next frame starts; it is also returned to the SPI master.
//
// Timing: a new MISO bit appears 3 to 4 clk cycles after the SCLK falling
// edge that asks for it (synchroniser, edge detect, shift), and MOSI is taken
// 2 to 3 cycles after the rising edge. Each SCLK half period must therefore
// last more than 4 clk cycles; 5 or more (SCLK <= clk/10) leaves margin for an
// SCLK that is asynchronous to clk. The master clocks 104 bits per frame to read the whole
// result frame; only the first 100 MOSI bits are used.
//
// Following the published design: the ports clk, resetn, mosi, sclk, csn,
// miso, start_transaction and the bit-serial hand-off to Mapper1 after
// sampling MOSI with SCLK, and start_transaction after 100 bits. This design's
// own choices: SPI mode 0, MSB first, oversampling with synchronisers, the
// bit_valid/frame_start/frame_done/shift_out strobes and MISO not tri-stated.
module spi_slave #(
  parameter int unsigned FRAME_BITS = 100
) (
  input  logic clk,
  input  logic resetn,
  input  logic sclk,
  input  logic csn,
  input  logic mosi,
  output logic miso,
  output logic start_transaction,
  // towards Mapper1
  output logic data_from_slave,
  output logic bit_valid,
  output logic frame_done,
  // towards / from Mapper2
  output logic frame_start,
  output logic shift_out,
  input  logic data_from_mapper
);

  localparam int unsigned CNT_W = $clog2(FRAME_BITS + 1);

  logic [2:0]       sclk_q;
  logic [2:0]       csn_q;
  logic [1:0]       mosi_q;
  logic [CNT_W-1:0] bit_cnt;

  logic sclk_rise, sclk_fall, cs_active, cs_fall;

  always_comb begin
    sclk_rise = sclk_q[1] && !sclk_q[2];
    sclk_fall = !sclk_q[1] && sclk_q[2];
    cs_active = !csn_q[1];
    cs_fall   = !csn_q[1] && csn_q[2];
  end

  always_ff @(posedge clk) begin
    if (!resetn) begin
      sclk_q <= '0;
      csn_q  <= '1;
      mosi_q <= '0;
    end else begin
      sclk_q <= {sclk_q[1:0], sclk};
      csn_q  <= {csn_q[1:0], csn};
      mosi_q <= {mosi_q[0], mosi};
    end
  end

  always_ff @(posedge clk) begin
    if (!resetn) begin
      bit_cnt           <= '0;
      data_from_slave   <= 1'b0;
      bit_valid         <= 1'b0;
      frame_done        <= 1'b0;
      frame_start       <= 1'b0;
      shift_out         <= 1'b0;
      start_transaction <= 1'b0;
    end else begin
      bit_valid   <= 1'b0;
      frame_start <= 1'b0;
      shift_out   <= 1'b0;
      frame_done  <= bit_valid && (bit_cnt == CNT_W'(FRAME_BITS));
      if (bit_valid && (bit_cnt == CNT_W'(FRAME_BITS)))
        start_transaction <= 1'b1;
      if (cs_fall) begin
        bit_cnt           <= '0;
        frame_start       <= 1'b1;
        start_transaction <= 1'b0;
      end else if (cs_active) begin
        if (sclk_rise && bit_cnt < CNT_W'(FRAME_BITS)) begin
          data_from_slave <= mosi_q[1];
          bit_valid       <= 1'b1;
          bit_cnt         <= bit_cnt + 1'b1;
        end
        if (sclk_fall)
          shift_out <= 1'b1;
      end
    end
  end

  assign miso = data_from_mapper;

endmodule
