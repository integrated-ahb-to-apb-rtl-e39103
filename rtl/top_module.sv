// top_module -- FPGA top of the SPI-driven AHB-to-APB bridge test system.
//
// An SPI master (a Raspberry Pi in the original set-up) plays the AHB master.
// Each SPI frame carries 100 bits: the AHB address-phase and data-phase
// signals plus the read data the APB peripheral should return. The chain is
//
//   SPI pins -> spi_slave -> mapper1 -> bridge_top -> mapper2 -> spi_slave -> MISO
//
// spi_slave samples MOSI and hands the bits one at a time to mapper1, which
// rebuilds the frame and presents it to bridge_top as one AHB transfer.
// bridge_top converts it into an APB setup and access cycle. mapper2 takes a
// 104-bit snapshot of the bridge outputs during the APB access cycle (or when
// the bridge reports an error) and shifts it back out on MISO during the next
// SPI frame. start_transaction tells the master that a full frame has been
// received. The APB outputs are also brought out so that real peripherals or
// a logic analyser can be attached.
//
// Clocking: one clock, clk (Hclk), for the whole FPGA logic; SCLK is
// oversampled and must be at most clk/10. reset_n is active low, synchronous.
//
// The five blocks and their connections follow the published system diagram;
// the frame layouts and the oversampled SPI are this design's own choices
// (see ahb_apb_pkg, spi_slave, mapper1, mapper2).
module top_module
  import ahb_apb_pkg::*;
(
  input  logic              clk,
  input  logic              reset_n,
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  output logic              start_transaction,
  output logic              Pwriteout,
  output logic              Penableout,
  output logic [SEL_W-1:0]  Pselxout,
  output logic [ADDR_W-1:0] Paddrout,
  output logic [DATA_W-1:0] Pwdataout
);

  // spi_slave <-> mappers
  logic data_from_slave, bit_valid, frame_done, frame_start, shift_out;
  logic data_to_slave;

  // mapper1 -> bridge_top
  logic [DATA_W-1:0] prdata;
  logic [ADDR_W-1:0] haddr;
  logic [DATA_W-1:0] hwdata;
  logic [1:0]        htrans;
  logic              hreadyin;
  logic              hwrite;

  // bridge_top -> mapper2
  logic              hreadyout;
  logic [1:0]        hresp;
  logic [DATA_W-1:0] hrdata;

  spi_slave #(.FRAME_BITS(IN_BITS)) u_spi_slave (
    .clk               (clk),
    .resetn            (reset_n),
    .sclk              (sclk),
    .csn               (cs_n),
    .mosi              (mosi),
    .miso              (miso),
    .start_transaction (start_transaction),
    .data_from_slave   (data_from_slave),
    .bit_valid         (bit_valid),
    .frame_done        (frame_done),
    .frame_start       (frame_start),
    .shift_out         (shift_out),
    .data_from_mapper  (data_to_slave)
  );

  mapper1 u_mapper1 (
    .clk             (clk),
    .resetn          (reset_n),
    .data_from_slave (data_from_slave),
    .bit_valid       (bit_valid),
    .frame_done      (frame_done),
    .Prdata          (prdata),
    .Haddr           (haddr),
    .Hwdata          (hwdata),
    .Htrans          (htrans),
    .Hreadyin        (hreadyin),
    .Hwrite          (hwrite)
  );

  bridge_top u_bridge_top (
    .Hclk       (clk),
    .Hresetn    (reset_n),
    .Haddr      (haddr),
    .Hwdata     (hwdata),
    .Htrans     (htrans),
    .Hwrite     (hwrite),
    .Hreadyin   (hreadyin),
    .Prdata     (prdata),
    .Pwriteout  (Pwriteout),
    .Penableout (Penableout),
    .Pselxout   (Pselxout),
    .Paddrout   (Paddrout),
    .Pwdataout  (Pwdataout),
    .Hreadyout  (hreadyout),
    .Hresp      (hresp),
    .Hrdata     (hrdata)
  );

  mapper2 u_mapper2 (
    .clk           (clk),
    .resetn        (reset_n),
    .Hreadyout     (hreadyout),
    .Hresp         (hresp),
    .Penableout    (Penableout),
    .Pwriteout     (Pwriteout),
    .Pselxout      (Pselxout),
    .Paddrout      (Paddrout),
    .Pwdataout     (Pwdataout),
    .Hrdata        (hrdata),
    .load          (frame_start),
    .shift         (shift_out),
    .data_to_slave (data_to_slave)
  );

endmodule
