// mapper2 -- packs the bridge outputs into the 104-bit result frame and
// serialises it for the SPI slave's MISO line.
//
// A snapshot register holds the last interesting bridge state, in the layout
// of ahb_apb_pkg::out_frame_t:
//   [103] Hreadyout [102:101] Hresp [100] Penableout [99] Pwriteout
//   [98:96] Pselxout [95:64] Paddrout [63:32] Pwdataout [31:0] Hrdata
// It is refreshed on every clk cycle in which the APB access phase is under
// way (Penableout high, so Hrdata already holds the peripheral's read data)
// or the bridge answers with a non-OKAY Hresp. At the start of each SPI frame
// (load) the snapshot is copied into a shift register whose MSB is
// data_to_slave; every shift strobe moves the next bit up. The result of the
// transfer issued by one SPI frame is therefore read out during the next.
//
// Timing: data_to_slave is registered; it shows bit 103 the cycle after load
// and the next bit the cycle after each shift. Reset is synchronous and active
// low and clears both registers.
//
// Following the published design: the 104-bit frame built from the bridge
// outputs and returned one bit at a time. This design's own choices: the
// field order, the capture condition and the one-frame delay.
module mapper2
  import ahb_apb_pkg::*;
#(
  parameter int unsigned FRAME_BITS = OUT_BITS
) (
  input  logic              clk,
  input  logic              resetn,
  input  logic              Hreadyout,
  input  logic [1:0]        Hresp,
  input  logic              Penableout,
  input  logic              Pwriteout,
  input  logic [SEL_W-1:0]  Pselxout,
  input  logic [ADDR_W-1:0] Paddrout,
  input  logic [DATA_W-1:0] Pwdataout,
  input  logic [DATA_W-1:0] Hrdata,
  input  logic              load,
  input  logic              shift,
  output logic              data_to_slave
);

  out_frame_t            snapshot;
  logic [FRAME_BITS-1:0] shreg;

  if (FRAME_BITS != $bits(out_frame_t)) begin : g_bad_width
    $error("mapper2: FRAME_BITS must equal the out_frame_t width");
  end

  always_ff @(posedge clk) begin
    if (!resetn) begin
      snapshot <= '0;
    end else if (Penableout || Hresp != HRESP_OKAY) begin
      snapshot <= '{hreadyout: Hreadyout, hresp: Hresp, penable: Penableout,
                    pwrite: Pwriteout, pselx: Pselxout, paddr: Paddrout,
                    pwdata: Pwdataout, hrdata: Hrdata};
    end
  end

  always_ff @(posedge clk) begin
    if (!resetn) begin
      shreg <= '0;
    end else if (load) begin
      shreg <= FRAME_BITS'(snapshot);
    end else if (shift) begin
      shreg <= {shreg[FRAME_BITS-2:0], 1'b0};
    end
  end

  assign data_to_slave = shreg[FRAME_BITS-1];

endmodule
