// tb_apb_fsm_controller -- self-checking testbench for the bridge FSM.
//
// Drives Valid, Hwrite, Hwritereg, Haddr, Haddr1, Hwdata and tempselx with
// random values every cycle and compares the FSM, cycle by cycle, with a
// reference model written as a table of the state diagram's arcs and of the
// APB values each state drives. Checks the state, Hreadyout, Penable, Pselx,
// Pwrite, Paddr and Pwdata after every clock edge, and that every one of the
// 18 arcs of the diagram (including the two this design adds: WRITEP ->
// WENABLEP and WENABLE -> IDLE) was taken at least once. Before the random
// run, a directed write and read use the values of the published FSM
// waveform (addresses 0x12345678 and 0x56781234, data 0x87654321, tempselx
// 0, 1, 2) and check the APB setup and access cycles explicitly.
module tb_apb_fsm_controller;
  import ahb_apb_pkg::*;

  logic        Hclk = 1'b0;
  logic        Hresetn;
  logic        Valid, Hwrite, Hwritereg;
  logic [31:0] Haddr, Haddr1, Hwdata;
  logic [2:0]  tempselx;
  logic        Pwrite, Penable, Hreadyout;
  logic [2:0]  Pselx;
  logic [31:0] Paddr, Pwdata;

  int checks = 0, failures = 0;

  always #5 Hclk = ~Hclk;

  apb_fsm_controller dut (.*);

  function automatic logic [2:0] ref_sel(input logic [31:0] a);
    case (a[31:26])
      6'b100000: return 3'b001;
      6'b100001: return 3'b010;
      6'b100010: return 3'b100;
      default:   return 3'b000;
    endcase
  endfunction

  // Reference model state.
  typedef enum int {IDLE, WWAIT, READ, WRITE, WRITEP, RENABLE, WENABLE, WENABLEP} rs_e;
  rs_e         rs;
  logic        r_pwrite, r_penable;
  logic [2:0]  r_psel;
  logic [31:0] r_paddr, r_pwdata;
  int          arc_cnt[8][8];

  function automatic rs_e ref_next(input rs_e s, input logic v, input logic w, input logic wr);
    case (s)
      IDLE:     return !v ? IDLE : (w ? WWAIT : READ);
      WWAIT:    return v ? WRITEP : WRITE;
      READ:     return RENABLE;
      WRITE:    return v ? WENABLEP : WENABLE;
      WRITEP:   return WENABLEP;
      RENABLE:  return !v ? IDLE : (w ? WWAIT : READ);
      WENABLE:  return !v ? IDLE : (w ? WWAIT : READ);
      WENABLEP: return !wr ? READ : (v ? WRITEP : WRITE);
      default:  return IDLE;
    endcase
  endfunction

  function automatic logic ref_ready(input rs_e s, input logic wr);
    return !(s == READ || s == WRITEP || (s == WENABLEP && !wr));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge Hclk) begin
    if (!Hresetn) begin
      rs <= IDLE; r_pwrite <= 0; r_penable <= 0; r_psel <= 0; r_paddr <= 0; r_pwdata <= 0;
    end else begin
      rs_e n;
      n = ref_next(rs, Valid, Hwrite, Hwritereg);
      arc_cnt[rs][n]++;
      rs <= n;
      case (n)
        IDLE, WWAIT: begin r_psel <= 0; r_penable <= 0; end
        READ: begin
          r_paddr   <= (rs == WENABLEP) ? Haddr1 : Haddr;
          r_psel    <= (rs == WENABLEP) ? ref_sel(Haddr1) : tempselx;
          r_pwrite  <= 0;
          r_penable <= 0;
        end
        WRITE, WRITEP: begin
          r_paddr <= Haddr1; r_psel <= ref_sel(Haddr1); r_pwdata <= Hwdata;
          r_pwrite <= 1; r_penable <= 0;
        end
        default: r_penable <= 1;
      endcase
    end
  end

  // Compare just before each rising edge, once everything has settled.
  always @(negedge Hclk) if (Hresetn) begin
    check(int'(dut.state) == int'(rs), $sformatf("state %0d, expected %0d", dut.state, rs));
    check(Hreadyout == ref_ready(rs, Hwritereg), $sformatf("Hreadyout %b in state %0d", Hreadyout, rs));
    check(Penable == r_penable && Pselx == r_psel && Pwrite == r_pwrite &&
          Paddr == r_paddr && Pwdata == r_pwdata,
          $sformatf("APB outputs en %b sel %b w %b a %h d %h, expected en %b sel %b w %b a %h d %h",
                    Penable, Pselx, Pwrite, Paddr, Pwdata,
                    r_penable, r_psel, r_pwrite, r_paddr, r_pwdata));
  end

  initial begin
    Hresetn = 0; Valid = 0; Hwrite = 0; Hwritereg = 0;
    Haddr = 0; Haddr1 = 0; Hwdata = 0; tempselx = 0;
    repeat (3) @(posedge Hclk);
    @(negedge Hclk) Hresetn = 1;
    // Directed run with the published FSM waveform's values: a write of
    // 0x87654321 to 0x12345678, then a read of 0x56781234, tempselx going
    // 0 -> 1 -> 2. Pwrite and Penable must both be high two cycles after the
    // write's address phase (WWAIT, WRITE, then WENABLE).
    @(negedge Hclk); #1;
    Valid = 1; Hwrite = 1; Haddr = 32'h1234_5678; tempselx = 3'd1;
    @(negedge Hclk); #1;
    Valid = 0; Hwrite = 0; Haddr1 = 32'h1234_5678; Hwritereg = 1;
    Hwdata = 32'h8765_4321; tempselx = 3'd0;
    @(negedge Hclk); #1;
    check(Pwrite && !Penable && Paddr == 32'h1234_5678 && Pwdata == 32'h8765_4321,
          "write setup with the published values");
    @(negedge Hclk); #1;
    check(Pwrite && Penable && Paddr == 32'h1234_5678 && Pwdata == 32'h8765_4321,
          "write access with the published values");
    Valid = 1; Hwrite = 0; Haddr = 32'h5678_1234; tempselx = 3'd2;
    @(negedge Hclk); #1;
    check(!Pwrite && !Penable && Paddr == 32'h5678_1234 && Pselx == 3'd2 && !Hreadyout,
          "read setup with the published values");
    Valid = 0; Haddr1 = 32'h5678_1234; Hwritereg = 0;
    @(negedge Hclk); #1;
    check(!Pwrite && Penable && Paddr == 32'h5678_1234 && Pselx == 3'd2 && Hreadyout,
          "read access with the published values");
    repeat (5000) begin
      @(negedge Hclk);
      #1;
      Valid     = ($urandom_range(0, 9) < 6);
      Hwrite    = 1'($urandom);
      Hwritereg = ($urandom_range(0, 9) < 7);
      Haddr     = {4'h8, 2'($urandom_range(0, 3)), 26'($urandom)};
      Haddr1    = {4'h8, 2'($urandom_range(0, 3)), 26'($urandom)};
      Hwdata    = $urandom;
      tempselx  = ref_sel(Haddr);
    end
    @(negedge Hclk);
    begin
      automatic int arcs[18][2] = '{'{IDLE, IDLE}, '{IDLE, WWAIT}, '{IDLE, READ},
                          '{WWAIT, WRITE}, '{WWAIT, WRITEP}, '{READ, RENABLE},
                          '{WRITE, WENABLE}, '{WRITE, WENABLEP}, '{WRITEP, WENABLEP},
                          '{RENABLE, READ}, '{RENABLE, WWAIT}, '{RENABLE, IDLE},
                          '{WENABLE, READ}, '{WENABLE, WWAIT}, '{WENABLE, IDLE},
                          '{WENABLEP, READ}, '{WENABLEP, WRITEP}, '{WENABLEP, WRITE}};
      foreach (arcs[i]) begin
        check(arc_cnt[arcs[i][0]][arcs[i][1]] > 0,
              $sformatf("arc %0d -> %0d never taken", arcs[i][0], arcs[i][1]));
        $display("arc %-8s -> %-8s taken %0d times", rs_e'(arcs[i][0]), rs_e'(arcs[i][1]),
                 arc_cnt[arcs[i][0]][arcs[i][1]]);
      end
    end
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
