// tb_top_module -- end-to-end testbench of the SPI-driven AHB-to-APB bridge.
//
// Plays the SPI master (mode 0, MSB first, 104 SCLK cycles per frame, SCLK
// half period HALF clk cycles). Each frame carries one 100-bit command,
// [99:98] Htrans, [97] Hreadyin, [96] Hwrite, [95:64] Haddr, [63:32] Hwdata,
// [31:0] Prdata, followed by 4 padding bits. The testbench predicts, from the
// commands alone, which APB transfer each frame must cause and which 104-bit
// result frame must come back on MISO during the following frame:
// [103] Hreadyout, [102:101] Hresp, [100] Penableout, [99] Pwriteout,
// [98:96] Pselxout, [95:64] Paddrout, [63:32] Pwdataout, [31:0] Hrdata.
//
// The sequence sends the published test frame 0x4_8000000C_FFFFFFFF_56781234,
// a write of 0xFFFFFFFF to 0x8000000C and a read of 0x80000008 returning
// 0x56781234 (the published waveform values), the published result-table
// command (address 0x8C000000, data 0x87654321, read data 0x12345678), a
// frame with Hreadyin low, and random commands. It counts writes, reads,
// error responses, ignored commands and start_transaction pulses, and fails
// if any of them never happened.
module tb_top_module;

  localparam int HALF = 6;

  logic        clk = 1'b0;
  logic        reset_n;
  logic        sclk, cs_n, mosi, miso, start_transaction;
  logic        Pwriteout, Penableout;
  logic [2:0]  Pselxout;
  logic [31:0] Paddrout, Pwdataout;

  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_err = 0, n_ignored = 0, n_start = 0, n_apb = 0;

  always #5 clk = ~clk;

  top_module dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [2:0] ref_sel(input logic [31:0] a);
    case (a[31:26])
      6'b100000: return 3'b001;
      6'b100001: return 3'b010;
      6'b100010: return 3'b100;
      default:   return 3'b000;
    endcase
  endfunction

  task automatic wait_clk(input int n);
    repeat (n) @(posedge clk);
  endtask

  // One SPI frame: 104 clocks, returns what came back on MISO.
  task automatic spi_frame(input logic [99:0] cmd, output logic [103:0] rx);
    logic [103:0] tx;
    tx = {cmd, 4'b0000};
    rx = '0;
    cs_n = 1'b0;
    wait_clk(HALF);
    for (int i = 0; i < 104; i++) begin
      mosi = tx[103 - i];
      wait_clk(HALF);
      rx = {rx[102:0], miso};
      sclk = 1'b1;
      wait_clk(HALF);
      sclk = 1'b0;
    end
    wait_clk(HALF);
    cs_n = 1'b1;
    wait_clk(4 * HALF);
  endtask

  // APB monitor on the top-level ports.
  logic [31:0] seen_addr, seen_wdata;
  logic        seen_write;
  logic [2:0]  seen_sel;
  int          apb_this_frame;
  logic        start_q;
  always @(posedge clk) begin
    start_q <= start_transaction;
    if (start_transaction && !start_q) n_start++;
    if (reset_n && Penableout) begin
      n_apb++;
      apb_this_frame++;
      seen_addr  = Paddrout;
      seen_wdata = Pwdataout;
      seen_write = Pwriteout;
      seen_sel   = Pselxout;
    end
  end

  // Prediction state: what the bridge outputs last showed.
  logic [103:0] exp_result;     // snapshot expected after the current frame
  logic         last_pwrite;
  logic [31:0]  last_paddr, last_pwdata;

  task automatic run_cmd(input logic [99:0] cmd);
    logic [1:0]   htrans;
    logic         hready, hwrite;
    logic [31:0]  haddr, hwdata, prdata;
    logic [103:0] rx, prev_expect;
    logic         transfer;
    logic [2:0]   sel;
    {htrans, hready, hwrite, haddr, hwdata, prdata} = cmd;
    sel      = ref_sel(haddr);
    transfer = hready && htrans[1];
    prev_expect = exp_result;
    apb_this_frame = 0;
    spi_frame(cmd, rx);
    check(start_transaction, "start_transaction low after a full frame");
    check(rx == prev_expect, $sformatf("MISO frame %h, expected %h", rx, prev_expect));
    if (transfer && sel != 0) begin
      check(apb_this_frame == 1, $sformatf("%0d APB transfers for one command", apb_this_frame));
      check(seen_addr == haddr && seen_write == hwrite && seen_sel == sel &&
            (!hwrite || seen_wdata == hwdata),
            $sformatf("APB saw a %h w %b d %h sel %b; command a %h w %b d %h",
                      seen_addr, seen_write, seen_wdata, seen_sel, haddr, hwrite, hwdata));
      last_pwrite = hwrite;
      last_paddr  = haddr;
      if (hwrite) last_pwdata = hwdata;
      exp_result = {1'b1, 2'b00, 1'b1, hwrite, sel, haddr, last_pwdata, prdata};
      if (hwrite) n_write++; else n_read++;
    end else if (transfer) begin
      check(apb_this_frame == 0, "APB transfer for an unmapped address");
      exp_result = {1'b1, 2'b10, 1'b0, last_pwrite, 3'b000, last_paddr, last_pwdata, prdata};
      n_err++;
    end else begin
      check(apb_this_frame == 0, "APB transfer for a command without a transfer");
      n_ignored++;
    end
  endtask

  initial begin
    reset_n = 0; sclk = 0; cs_n = 1; mosi = 0;
    exp_result = '0; last_pwrite = 0; last_paddr = 0; last_pwdata = 0;
    start_q = 0;
    wait_clk(5);
    reset_n = 1;
    wait_clk(5);

    // published test frame (no transfer under this frame layout)
    run_cmd(100'h4_8000000C_FFFFFFFF_56781234);
    // write 0xFFFFFFFF to 0x8000000C, read 0x80000008 -> 0x56781234
    run_cmd({2'b10, 1'b1, 1'b1, 32'h8000_000C, 32'hFFFF_FFFF, 32'h5678_1234});
    run_cmd({2'b11, 1'b1, 1'b0, 32'h8000_0008, 32'hFFFF_FFFF, 32'h5678_1234});
    // published result-table command: unmapped address, error response
    run_cmd({2'b10, 1'b1, 1'b1, 32'h8C00_0000, 32'h8765_4321, 32'h1234_5678});
    // Hreadyin low: no transfer
    run_cmd({2'b10, 1'b0, 1'b1, 32'h8400_0000, 32'h1111_2222, 32'h3333_4444});
    // random commands
    for (int n = 0; n < 24; n++) begin
      logic [31:0] a;
      a = {4'h8, 2'($urandom_range(0, 3)), 26'($urandom)};
      run_cmd({2'($urandom_range(1, 3)), ($urandom_range(0, 7) != 0), 1'($urandom),
               a, $urandom, $urandom});
    end
    // one more frame to read back the last result
    run_cmd(100'h0);

    check(n_write > 0, "no write transfer");
    check(n_read > 0, "no read transfer");
    check(n_err > 0, "no error response");
    check(n_ignored > 0, "no ignored command");
    check(n_start == 30, $sformatf("%0d start_transaction pulses for 30 frames", n_start));
    $display("writes %0d, reads %0d, error responses %0d, ignored %0d, start_transaction %0d, APB transfers %0d",
             n_write, n_read, n_err, n_ignored, n_start, n_apb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait_clk(200000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
