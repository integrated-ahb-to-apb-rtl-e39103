// tb_ahb_slave_interface -- self-checking testbench for the AHB slave front end.
//
// Applies random address-phase signals (addresses inside and outside the
// address map, every Htrans value, Hreadyin high and low) and checks, against
// values worked out in the testbench:
//   * Valid and tempselx, combinationally, in the same cycle;
//   * Haddr1 and Hwritereg: updated only at edges where Hreadyin was high;
//   * Hresp: 2'b10 in the cycle after a requested transfer to an unmapped
//     address, 2'b00 otherwise;
//   * Hrdata equal to Prdata.
// It also counts valid transfers, stalled cycles and error responses and
// fails if any of them never occurred.
module tb_ahb_slave_interface;
  import ahb_apb_pkg::*;

  logic        Hclk = 1'b0;
  logic        Hresetn;
  logic [31:0] Haddr, Prdata, Haddr1, Hrdata;
  logic [1:0]  Htrans, Hresp;
  logic        Hwrite, Hreadyin, Valid, Hwritereg;
  logic [2:0]  tempselx;

  int checks = 0, failures = 0;
  int n_valid = 0, n_stall = 0, n_err = 0;

  always #5 Hclk = ~Hclk;

  ahb_slave_interface dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] exp_haddr1;
  logic        exp_hwritereg;
  logic [1:0]  exp_hresp;

  initial begin
    Hresetn = 0; Haddr = 0; Prdata = 0; Htrans = 0; Hwrite = 0; Hreadyin = 0;
    repeat (3) @(posedge Hclk);
    @(negedge Hclk) Hresetn = 1;
    exp_haddr1 = 0; exp_hwritereg = 0; exp_hresp = 0;
    repeat (4000) begin
      logic [2:0] sel;
      logic       req;
      @(negedge Hclk);
      // registered outputs, result of the previous edge
      check(Haddr1 == exp_haddr1 && Hwritereg == exp_hwritereg,
            $sformatf("Haddr1 %h Hwritereg %b, expected %h %b", Haddr1, Hwritereg,
                      exp_haddr1, exp_hwritereg));
      check(Hresp == exp_hresp, $sformatf("Hresp %b expected %b", Hresp, exp_hresp));
      // new stimulus
      case ($urandom_range(0, 4))
        0: Haddr = 32'h8000_0000 | ($urandom & 32'h03FF_FFFF);
        1: Haddr = 32'h8400_0000 | ($urandom & 32'h03FF_FFFF);
        2: Haddr = 32'h8800_0000 | ($urandom & 32'h03FF_FFFF);
        3: Haddr = 32'h8C00_0000 | ($urandom & 32'h03FF_FFFF);
        default: Haddr = $urandom;
      endcase
      Htrans   = 2'($urandom);
      Hwrite   = 1'($urandom);
      Hreadyin = ($urandom_range(0, 3) != 0);
      Prdata   = $urandom;
      #1;
      sel = (Haddr >= 32'h8000_0000 && Haddr <= 32'h83FF_FFFF) ? 3'd1 :
            (Haddr >= 32'h8400_0000 && Haddr <= 32'h87FF_FFFF) ? 3'd2 :
            (Haddr >= 32'h8800_0000 && Haddr <= 32'h8BFF_FFFF) ? 3'd4 : 3'd0;
      req = Hreadyin && Htrans[1];
      check(tempselx == sel, $sformatf("tempselx %b for %h, expected %b", tempselx, Haddr, sel));
      check(Valid == (req && sel != 0), $sformatf("Valid %b for %h trans %b ready %b",
                                                  Valid, Haddr, Htrans, Hreadyin));
      check(Hrdata == Prdata, "Hrdata differs from Prdata");
      if (Valid) n_valid++;
      if (!Hreadyin) n_stall++;
      if (Hreadyin) begin
        exp_haddr1    = Haddr;
        exp_hwritereg = Hwrite;
      end
      exp_hresp = (req && sel == 0) ? 2'b10 : 2'b00;
      if (exp_hresp != 0) n_err++;
    end
    check(n_valid > 0, "no valid transfer");
    check(n_stall > 0, "no cycle with Hreadyin low");
    check(n_err > 0, "no unmapped access");
    $display("valid %0d, stalled %0d, unmapped %0d", n_valid, n_stall, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge Hclk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
