// bridge_top -- AHB-to-APB bridge.
//
// An AHB slave on one side, an APB master on the other, both on Hclk. The AHB
// slave interface qualifies each address phase (Valid), decodes the target
// peripheral (tempselx) and keeps the last accepted address and direction
// (Haddr1, Hwritereg); the APB FSM controller turns each accepted transfer
// into an APB setup cycle and an APB access cycle and holds the AHB bus with
// Hreadyout while it does. Read data goes straight back (Hrdata = Prdata) and
// an access to an unmapped address is answered with Hresp = 2'b10.
//
// Interface: AHB inputs Haddr, Hwdata, Htrans, Hwrite, Hreadyin, read data
// Prdata from the APB peripheral; APB outputs Pselxout (one-hot, 3 bits),
// Penableout, Pwriteout, Paddrout, Pwdataout; AHB outputs Hreadyout, Hresp,
// Hrdata. Hreadyin is the AHB bus-wide ready; in a normal AHB system it is
// this bridge's own Hreadyout.
//
// Timing: a read costs two cycles after its address phase, a write three
// (data phase, setup, access); back-to-back writes stream at one APB transfer
// every two cycles. See apb_fsm_controller for the cycle-level detail.
// Immediate assertions check at each clock edge that Pselxout is one-hot or
// zero and that Penableout is never high without a selected peripheral.
//
// The split into a slave interface and an FSM controller and the signal names
// follow the published design. Its third part, the APB interface, only renames
// the FSM's outputs to the *out ports, so those ports are driven by the FSM
// directly here.
module bridge_top
  import ahb_apb_pkg::*;
(
  input  logic              Hclk,
  input  logic              Hresetn,
  input  logic [ADDR_W-1:0] Haddr,
  input  logic [DATA_W-1:0] Hwdata,
  input  logic [1:0]        Htrans,
  input  logic              Hwrite,
  input  logic              Hreadyin,
  input  logic [DATA_W-1:0] Prdata,
  output logic              Pwriteout,
  output logic              Penableout,
  output logic [SEL_W-1:0]  Pselxout,
  output logic [ADDR_W-1:0] Paddrout,
  output logic [DATA_W-1:0] Pwdataout,
  output logic              Hreadyout,
  output logic [1:0]        Hresp,
  output logic [DATA_W-1:0] Hrdata
);

  logic              valid;
  logic [SEL_W-1:0]  tempselx;
  logic [ADDR_W-1:0] haddr1;
  logic              hwritereg;

  ahb_slave_interface u_ahb_slave (
    .Hclk      (Hclk),
    .Hresetn   (Hresetn),
    .Haddr     (Haddr),
    .Htrans    (Htrans),
    .Hwrite    (Hwrite),
    .Hreadyin  (Hreadyin),
    .Prdata    (Prdata),
    .Valid     (valid),
    .tempselx  (tempselx),
    .Haddr1    (haddr1),
    .Hwritereg (hwritereg),
    .Hrdata    (Hrdata),
    .Hresp     (Hresp)
  );

  apb_fsm_controller u_apb_fsm (
    .Hclk      (Hclk),
    .Hresetn   (Hresetn),
    .Valid     (valid),
    .Hwrite    (Hwrite),
    .Hwritereg (hwritereg),
    .Haddr     (Haddr),
    .Haddr1    (haddr1),
    .Hwdata    (Hwdata),
    .tempselx  (tempselx),
    .Pwrite    (Pwriteout),
    .Penable   (Penableout),
    .Pselx     (Pselxout),
    .Paddr     (Paddrout),
    .Pwdata    (Pwdataout),
    .Hreadyout (Hreadyout)
  );

  // APB rules the outputs must keep, checked at every clock edge out of
  // reset: at most one peripheral is selected, and an access cycle always
  // has a peripheral selected.
  always_ff @(posedge Hclk) begin
    if (Hresetn) begin
      a_sel_onehot: assert ((Pselxout & (Pselxout - 1'b1)) == '0)
        else $error("Pselxout %b selects more than one peripheral", Pselxout);
      a_enable_has_sel: assert (!Penableout || Pselxout != '0)
        else $error("Penableout high with no peripheral selected");
    end
  end

endmodule
