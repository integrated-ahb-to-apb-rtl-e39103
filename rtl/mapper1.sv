// mapper1 -- turns the serial command bits into the AHB master signals.
//
// Bits arrive from the SPI slave MSB first, one per bit_valid strobe, and are
// shifted into a 100-bit register. When the SPI slave signals frame_done the
// register is copied into the output registers, split into the fields of
// ahb_apb_pkg::in_frame_t:
//   [99:98] Htrans  [97] Hreadyin  [96] Hwrite
//   [95:64] Haddr   [63:32] Hwdata [31:0] Prdata
// Haddr, Hwdata, Hwrite, Hreadyin and Prdata then hold their values until the
// next frame. Htrans carries the frame's value for exactly one clk cycle, the
// cycle after frame_done, and is IDLE otherwise, so one frame issues at most
// one AHB transfer (the address phase) and its data phase sees the same
// Hwdata. Prdata stands in for the APB peripheral's read data.
//
// Timing: outputs change one clk cycle after frame_done. Reset is synchronous
// and active low and clears every output (Htrans = IDLE).
//
// Following the published design: the accumulation of 100 serial bits and the
// six output signals. This design's own choices: the field order of the frame
// and issuing Htrans for a single cycle per frame.
module mapper1
  import ahb_apb_pkg::*;
#(
  parameter int unsigned FRAME_BITS = IN_BITS
) (
  input  logic              clk,
  input  logic              resetn,
  input  logic              data_from_slave,
  input  logic              bit_valid,
  input  logic              frame_done,
  output logic [DATA_W-1:0] Prdata,
  output logic [ADDR_W-1:0] Haddr,
  output logic [DATA_W-1:0] Hwdata,
  output logic [1:0]        Htrans,
  output logic              Hreadyin,
  output logic              Hwrite
);

  logic [FRAME_BITS-1:0] shreg;
  in_frame_t             frame;

  // The frame layout fixes FRAME_BITS; a different value cannot be mapped.
  if (FRAME_BITS != $bits(in_frame_t)) begin : g_bad_width
    $error("mapper1: FRAME_BITS must equal the in_frame_t width");
  end

  assign frame = in_frame_t'(shreg);

  always_ff @(posedge clk) begin
    if (!resetn) begin
      shreg <= '0;
    end else if (bit_valid) begin
      shreg <= {shreg[FRAME_BITS-2:0], data_from_slave};
    end
  end

  always_ff @(posedge clk) begin
    if (!resetn) begin
      Prdata   <= '0;
      Haddr    <= '0;
      Hwdata   <= '0;
      Htrans   <= HTRANS_IDLE;
      Hreadyin <= 1'b0;
      Hwrite   <= 1'b0;
    end else if (frame_done) begin
      Prdata   <= frame.prdata;
      Haddr    <= frame.haddr;
      Hwdata   <= frame.hwdata;
      Htrans   <= frame.htrans;
      Hreadyin <= frame.hreadyin;
      Hwrite   <= frame.hwrite;
    end else begin
      Htrans   <= HTRANS_IDLE;
    end
  end

endmodule
