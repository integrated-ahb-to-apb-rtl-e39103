// tb_mapper2 -- self-checking testbench for the result-frame serialiser.
//
// Drives the bridge-output inputs with random values, some cycles with
// Penableout high, some with a non-OKAY Hresp and the rest with neither.
// The testbench keeps its own copy of the last qualifying values. After a load
// strobe it shifts the 104 bits out and checks them against that copy, packed
// as [103] Hreadyout, [102:101] Hresp, [100] Penableout, [99] Pwriteout,
// [98:96] Pselxout, [95:64] Paddrout, [63:32] Pwdataout, [31:0] Hrdata. It
// also checks that cycles without Penableout or an error leave the snapshot
// unchanged.
module tb_mapper2;

  logic        clk = 1'b0;
  logic        resetn;
  logic        Hreadyout, Penableout, Pwriteout;
  logic [1:0]  Hresp;
  logic [2:0]  Pselxout;
  logic [31:0] Paddrout, Pwdataout, Hrdata;
  logic        load, shift, data_to_slave;

  int checks = 0, failures = 0;
  int n_cap = 0, n_err = 0, n_skip = 0;

  always #5 clk = ~clk;

  mapper2 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  logic [103:0] expect_frame;

  initial begin
    logic [103:0] got;
    resetn = 0; load = 0; shift = 0;
    Hreadyout = 0; Penableout = 0; Pwriteout = 0; Hresp = 0;
    Pselxout = 0; Paddrout = 0; Pwdataout = 0; Hrdata = 0;
    expect_frame = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) resetn = 1;
    for (int f = 0; f < 30; f++) begin
      // a few cycles of bridge activity
      repeat ($urandom_range(1, 6)) begin
        int kind;
        @(negedge clk);
        kind = $urandom_range(0, 2);
        Hreadyout  = 1'($urandom);
        Pwriteout  = 1'($urandom);
        Pselxout   = 3'($urandom);
        Paddrout   = $urandom;
        Pwdataout  = $urandom;
        Hrdata     = $urandom;
        Penableout = (kind == 0);
        Hresp      = (kind == 1) ? 2'b10 : 2'b00;
        if (kind != 2)
          expect_frame = {Hreadyout, Hresp, Penableout, Pwriteout, Pselxout,
                          Paddrout, Pwdataout, Hrdata};
        if (kind == 0) n_cap++; else if (kind == 1) n_err++; else n_skip++;
      end
      @(negedge clk);
      Penableout = 0; Hresp = 0;
      load = 1;
      @(negedge clk);
      load = 0;
      got = '0;
      for (int i = 0; i < 104; i++) begin
        got = {got[102:0], data_to_slave};
        shift = 1;
        @(negedge clk);
        shift = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      check(got == expect_frame, $sformatf("frame %0d: %h expected %h", f, got, expect_frame));
    end
    check(n_cap > 0 && n_err > 0 && n_skip > 0, "not every capture case exercised");
    $display("captures %0d, error captures %0d, ignored cycles %0d", n_cap, n_err, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
