// ahb_slave_interface -- AHB slave front end of the AHB-to-APB bridge.
//
// Looks at the AHB address-phase signals every Hclk cycle and tells the APB
// FSM controller whether a transfer for one of the APB peripherals is being
// presented (Valid), which peripheral it addresses (tempselx) and, through a
// pipeline register, the address and direction of the last accepted transfer
// (Haddr1, Hwritereg). It also returns the peripheral read data to the AHB
// side (Hrdata) and drives the AHB response (Hresp).
//
// Valid     = Hreadyin & Htrans is NONSEQ or SEQ & Haddr lies in the address
//             map (see ahb_apb_pkg). Combinational, same cycle.
// tempselx  = one-hot select decoded from Haddr. Combinational.
// Haddr1,   = Haddr and Hwrite registered on every rising Hclk edge at which
// Hwritereg   Hreadyin is high, i.e. when an address phase completes, so they
//             keep the pending transfer while the bridge stalls the bus.
// Hresp     = 2'b10 during the cycle after an address phase that requested a
//             transfer to an unmapped address, else 2'b00 (registered).
// Hrdata    = Prdata, combinational.
// Reset is synchronous and active low (Hresetn).
//
// Following the published design: the inputs and outputs named above, the
// Valid/tempselx/Hwritereg hand-off to the FSM, the pipelining of the address,
// Hrdata = Prdata and an OKAY response (0) for a mapped access. This design's
// own choices: the address map, gating the pipeline register with Hreadyin,
// the value 2'b10 for an unmapped access (taken from the published result
// table) and its one-cycle timing. The published block also lists a second
// pipeline stage (Haddr2, Hwdata1, Hwdata2) and Hwdata as an input; the FSM
// here always issues from the first stage and samples Hwdata itself at the
// end of the data phase, so neither is built into this block.
module ahb_slave_interface
  import ahb_apb_pkg::*;
(
  input  logic              Hclk,
  input  logic              Hresetn,
  input  logic [ADDR_W-1:0] Haddr,
  input  logic [1:0]        Htrans,
  input  logic              Hwrite,
  input  logic              Hreadyin,
  input  logic [DATA_W-1:0] Prdata,
  output logic              Valid,
  output logic [SEL_W-1:0]  tempselx,
  output logic [ADDR_W-1:0] Haddr1,
  output logic              Hwritereg,
  output logic [DATA_W-1:0] Hrdata,
  output logic [1:0]        Hresp
);

  logic requested;

  always_comb begin
    tempselx  = decode_sel(Haddr);
    requested = Hreadyin && is_transfer(Htrans);
    Valid     = requested && (tempselx != '0);
    Hrdata    = Prdata;
  end

  always_ff @(posedge Hclk) begin
    if (!Hresetn) begin
      Haddr1    <= '0;
      Hwritereg <= 1'b0;
      Hresp     <= HRESP_OKAY;
    end else begin
      if (Hreadyin) begin
        Haddr1    <= Haddr;
        Hwritereg <= Hwrite;
      end
      Hresp <= (requested && tempselx == '0) ? HRESP_ERR : HRESP_OKAY;
    end
  end

endmodule
