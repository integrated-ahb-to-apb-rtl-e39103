// tb_spi_slave -- self-checking testbench for the oversampling SPI slave.
//
// An SPI master model (mode 0, MSB first, SCLK half period HALF clk cycles)
// sends frames of 104 clocks whose first 100 MOSI bits are random. A model
// of the result serialiser answers frame_start/shift_out with a random
// 104-bit pattern. Checks:
//   * exactly 100 bit_valid strobes per frame, carrying the MOSI bits in order;
//   * one frame_done pulse per frame, after the 100th bit;
//   * start_transaction low after CSn falls and high once 100 bits arrived;
//   * one frame_start pulse per frame;
//   * the 104 bits read from MISO equal the serialiser's pattern.
// A short frame (CSn raised after 60 bits) must not produce frame_done.
module tb_spi_slave;

  localparam int HALF = 6;

  logic clk = 1'b0;
  logic resetn;
  logic sclk, csn, mosi, miso, start_transaction;
  logic data_from_slave, bit_valid, frame_done, frame_start, shift_out, data_from_mapper;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spi_slave dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Result serialiser model.
  logic [103:0] pattern, ser;
  always @(posedge clk) begin
    if (frame_start) ser <= pattern;
    else if (shift_out) ser <= {ser[102:0], 1'b0};
  end
  assign data_from_mapper = ser[103];

  // Monitor of the Mapper1 side.
  logic [99:0] got;
  int nbits, ndone, nstart;
  always @(posedge clk) begin
    if (bit_valid) begin
      got <= {got[98:0], data_from_slave};
      nbits <= nbits + 1;
    end
    if (frame_done) ndone <= ndone + 1;
    if (frame_start) nstart <= nstart + 1;
  end

  task automatic wait_clk(input int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic spi_frame(input logic [103:0] tx, input int nclk, output logic [103:0] rx);
    rx = '0;
    csn = 1'b0;
    wait_clk(HALF);
    for (int i = 0; i < nclk; i++) begin
      mosi = tx[103 - i];
      wait_clk(HALF);
      rx = {rx[102:0], miso};
      sclk = 1'b1;
      wait_clk(HALF);
      sclk = 1'b0;
    end
    wait_clk(HALF);
    csn = 1'b1;
    wait_clk(2 * HALF);
  endtask

  initial begin
    logic [103:0] tx, rx;
    resetn = 0; sclk = 0; csn = 1; mosi = 0;
    pattern = '0; ser = '0; got = '0; nbits = 0; ndone = 0; nstart = 0;
    wait_clk(4);
    resetn = 1;
    wait_clk(4);
    check(!start_transaction, "start_transaction high after reset");
    for (int f = 0; f < 12; f++) begin
      tx = {$urandom, $urandom, $urandom, 8'($urandom)};
      pattern = {$urandom, $urandom, $urandom, 8'($urandom)};
      nbits = 0; ndone = 0; nstart = 0;
      fork
        spi_frame(tx, 104, rx);
        begin
          // start_transaction drops once the new frame starts (CSn falls
          // at the start of spi_frame)
          wait_clk(5);
          check(!start_transaction, "start_transaction still high at frame start");
        end
      join
      check(nbits == 100, $sformatf("frame %0d: %0d bits handed on", f, nbits));
      check(got == tx[103:4], $sformatf("frame %0d: bits %h, sent %h", f, got, tx[103:4]));
      check(ndone == 1, $sformatf("frame %0d: %0d frame_done pulses", f, ndone));
      check(nstart == 1, $sformatf("frame %0d: %0d frame_start pulses", f, nstart));
      check(start_transaction, $sformatf("frame %0d: start_transaction low", f));
      check(rx == pattern, $sformatf("frame %0d: MISO %h, expected %h", f, rx, pattern));
    end
    // short frame
    nbits = 0; ndone = 0;
    spi_frame({$urandom, $urandom, $urandom, 8'($urandom)}, 60, rx);
    check(nbits == 60, $sformatf("short frame: %0d bits", nbits));
    check(ndone == 0, "short frame produced frame_done");
    check(!start_transaction, "short frame raised start_transaction");
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
