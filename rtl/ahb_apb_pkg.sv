// ahb_apb_pkg -- types and constants shared by the SPI-fed AHB-to-APB bridge.
//
// Holds the bus widths, the AHB transfer-type encoding, the eight bridge FSM
// states, the layout of the 100-bit input frame and the 104-bit output frame,
// and the address map that turns an AHB address into a one-hot APB select.
//
// The widths (32-bit address and data, 2-bit Htrans, 3-bit Pselx, 100-bit and
// 104-bit frames) and the state names are those of the published design. The
// bit order of the two frames and the address map are choices of this design:
//   * input frame  [99:98] Htrans, [97] Hreadyin, [96] Hwrite,
//                  [95:64] Haddr, [63:32] Hwdata, [31:0] Prdata
//   * output frame [103] Hreadyout, [102:101] Hresp, [100] Penableout,
//                  [99] Pwriteout, [98:96] Pselxout, [95:64] Paddrout,
//                  [63:32] Pwdataout, [31:0] Hrdata
//   * address map  0x8000_0000-0x83FF_FFFF -> Pselx 3'b001
//                  0x8400_0000-0x87FF_FFFF -> Pselx 3'b010
//                  0x8800_0000-0x8BFF_FFFF -> Pselx 3'b100
//                  anything else           -> no peripheral (error response)
package ahb_apb_pkg;

  localparam int unsigned ADDR_W    = 32;
  localparam int unsigned DATA_W    = 32;
  localparam int unsigned SEL_W     = 3;
  localparam int unsigned IN_BITS   = 100;
  localparam int unsigned OUT_BITS  = 104;

  // AHB HTRANS encoding (AMBA AHB).
  typedef enum logic [1:0] {
    HTRANS_IDLE   = 2'b00,
    HTRANS_BUSY   = 2'b01,
    HTRANS_NONSEQ = 2'b10,
    HTRANS_SEQ    = 2'b11
  } htrans_e;

  // Response driven when a transfer addresses no peripheral. The published
  // result table reports 0b10 for such an access; that value is used here.
  localparam logic [1:0] HRESP_OKAY = 2'b00;
  localparam logic [1:0] HRESP_ERR  = 2'b10;

  // Bridge FSM states (names from the published state diagram).
  typedef enum logic [2:0] {
    ST_IDLE     = 3'd0,
    ST_WWAIT    = 3'd1,
    ST_READ     = 3'd2,
    ST_WRITE    = 3'd3,
    ST_WRITEP   = 3'd4,
    ST_RENABLE  = 3'd5,
    ST_WENABLE  = 3'd6,
    ST_WENABLEP = 3'd7
  } apb_state_e;

  // Fields of the 100-bit frame sent by the SPI master (MSB first).
  typedef struct packed {
    logic [1:0]        htrans;
    logic              hreadyin;
    logic              hwrite;
    logic [ADDR_W-1:0] haddr;
    logic [DATA_W-1:0] hwdata;
    logic [DATA_W-1:0] prdata;
  } in_frame_t;

  // Fields of the 104-bit frame returned to the SPI master (MSB first).
  typedef struct packed {
    logic              hreadyout;
    logic [1:0]        hresp;
    logic              penable;
    logic              pwrite;
    logic [SEL_W-1:0]  pselx;
    logic [ADDR_W-1:0] paddr;
    logic [DATA_W-1:0] pwdata;
    logic [DATA_W-1:0] hrdata;
  } out_frame_t;

  // One-hot peripheral select for an address; zero when nothing is mapped.
  function automatic logic [SEL_W-1:0] decode_sel(input logic [ADDR_W-1:0] addr);
    logic [SEL_W-1:0] sel;
    sel = '0;
    if (addr >= 32'h8000_0000 && addr < 32'h8400_0000)      sel = 3'b001;
    else if (addr >= 32'h8400_0000 && addr < 32'h8800_0000) sel = 3'b010;
    else if (addr >= 32'h8800_0000 && addr < 32'h8C00_0000) sel = 3'b100;
    return sel;
  endfunction

  // An AHB transfer is requested when HTRANS is NONSEQ or SEQ.
  function automatic logic is_transfer(input logic [1:0] htrans);
    return htrans == HTRANS_NONSEQ || htrans == HTRANS_SEQ;
  endfunction

endpackage
