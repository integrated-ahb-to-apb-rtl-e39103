// tb_mapper1 -- self-checking testbench for the frame-to-AHB mapper.
//
// Shifts random 100-bit frames in one bit per bit_valid strobe (with random
// gaps), pulses frame_done, and checks that the outputs carry the fields of
// the frame ([99:98] Htrans, [97] Hreadyin, [96] Hwrite, [95:64] Haddr,
// [63:32] Hwdata, [31:0] Prdata), that Htrans shows the frame's value for
// exactly one cycle and IDLE afterwards, and that the other outputs hold
// until the next frame. The published test frame 0x4_8000000C_FFFFFFFF_56781234
// is sent first.
module tb_mapper1;

  logic        clk = 1'b0;
  logic        resetn;
  logic        data_from_slave, bit_valid, frame_done;
  logic [31:0] Prdata, Haddr, Hwdata;
  logic [1:0]  Htrans;
  logic        Hreadyin, Hwrite;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mapper1 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input logic [99:0] f);
    for (int i = 99; i >= 0; i--) begin
      @(negedge clk);
      data_from_slave = f[i];
      bit_valid = 1'b1;
      @(negedge clk);
      bit_valid = 1'b0;
      data_from_slave = 1'($urandom);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    @(negedge clk) frame_done = 1'b1;
    @(negedge clk) frame_done = 1'b0;
    // outputs updated on the edge after frame_done
    check(Htrans == f[99:98], $sformatf("Htrans %b expected %b", Htrans, f[99:98]));
    check(Hreadyin == f[97] && Hwrite == f[96], "Hreadyin/Hwrite wrong");
    check(Haddr == f[95:64], $sformatf("Haddr %h expected %h", Haddr, f[95:64]));
    check(Hwdata == f[63:32], $sformatf("Hwdata %h expected %h", Hwdata, f[63:32]));
    check(Prdata == f[31:0], $sformatf("Prdata %h expected %h", Prdata, f[31:0]));
    @(negedge clk);
    check(Htrans == 2'b00, "Htrans not back to IDLE after one cycle");
    repeat (3) @(negedge clk);
    check(Haddr == f[95:64] && Hwdata == f[63:32] && Prdata == f[31:0] &&
          Hreadyin == f[97] && Hwrite == f[96], "outputs did not hold");
  endtask

  initial begin
    resetn = 0; data_from_slave = 0; bit_valid = 0; frame_done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) resetn = 1;
    @(negedge clk);
    check(Htrans == 2'b00 && Haddr == 0, "outputs not cleared by reset");
    send(100'h4_8000000C_FFFFFFFF_56781234);
    send({2'b10, 1'b1, 1'b1, 32'h8C00_0000, 32'h8765_4321, 32'h1234_5678});
    for (int n = 0; n < 20; n++)
      send({4'($urandom), $urandom, $urandom, $urandom});
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
