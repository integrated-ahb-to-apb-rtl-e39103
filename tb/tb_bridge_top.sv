// tb_bridge_top -- self-checking testbench for the AHB-to-APB bridge.
//
// A pipelined AHB master model issues a list of transfers (reads, writes,
// idle cycles and accesses to an unmapped address) with Hreadyin tied back to
// the bridge's Hreadyout, as in a one-slave AHB system. An APB slave model
// returns read data that is a fixed function of Paddr. Checks:
//   * every mapped transfer appears on APB exactly once, in order, with the
//     right Paddr, Pwrite, Pwdata and a one-hot Pselx from the address map;
//   * each AHB read returns the APB slave's data, with Hresp = OKAY;
//   * an unmapped access yields no APB transfer and Hresp = 2'b10;
//   * APB rules: an access cycle follows a setup cycle with the same select,
//     address, direction and write data; Penable never rises without a select;
//   * latency: a lone read finishes 2 cycles after its address phase, a lone
//     write reaches the APB access cycle 3 cycles after it, and a burst of
//     back-to-back writes streams one APB transfer every 2 cycles.
// It also counts how often each FSM state and the queued-read path were used
// and fails if one never happened.
module tb_bridge_top;
  import ahb_apb_pkg::*;

  logic        Hclk = 1'b0;
  logic        Hresetn;
  logic [31:0] Haddr, Hwdata, Prdata, Hrdata, Paddrout, Pwdataout;
  logic [1:0]  Htrans, Hresp;
  logic        Hwrite, Hreadyout, Pwriteout, Penableout;
  logic [2:0]  Pselxout;

  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 Hclk = ~Hclk;
  always @(posedge Hclk) cycle <= cycle + 1;

  bridge_top dut (
    .Hclk, .Hresetn, .Haddr, .Hwdata, .Htrans, .Hwrite,
    .Hreadyin (Hreadyout), .Prdata,
    .Pwriteout, .Penableout, .Pselxout, .Paddrout, .Pwdataout,
    .Hreadyout, .Hresp, .Hrdata
  );

  // ---------------- reference helpers (independent of the RTL package) ------
  function automatic logic [2:0] ref_sel(input logic [31:0] a);
    case (a[31:26])
      6'b100000: return 3'b001;
      6'b100001: return 3'b010;
      6'b100010: return 3'b100;
      default:   return 3'b000;
    endcase
  endfunction

  function automatic logic [31:0] slave_data(input logic [31:0] a);
    return {a[15:0], a[31:16]} ^ 32'h5A5A_C3C3;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // APB slave model: combinational read data.
  always_comb Prdata = (Pselxout != 0 && !Pwriteout) ? slave_data(Paddrout) : 32'hDEAD_BEEF;

  // ---------------- transfer list ----------------
  typedef struct {
    logic [1:0]  trans;
    logic        write;
    logic [31:0] addr;
    logic [31:0] wdata;
  } op_t;

  op_t ops[$];
  typedef struct {
    logic [31:0] addr;
    logic        write;
    logic [31:0] wdata;
    int          op_idx;
  } apb_exp_t;
  apb_exp_t apb_exp[$];

  int accept_cycle[int];     // op index -> cycle its address phase ended
  int done_cycle[int];       // op index -> cycle its data phase ended
  int apb_cycle[int];        // op index -> cycle of its APB access phase

  function automatic op_t mk(input logic [1:0] t, input logic w,
                             input logic [31:0] a, input logic [31:0] d);
    op_t o;
    o.trans = t; o.write = w; o.addr = a; o.wdata = d;
    return o;
  endfunction

  // ---------------- AHB master model ----------------
  int  ai;          // op in address phase
  bit  dp_valid;    // a transfer is in its data phase
  int  dp_idx;
  bit  running = 0;

  always_comb begin
    if (running && ai < ops.size()) begin
      Htrans = ops[ai].trans;
      Haddr  = ops[ai].addr;
      Hwrite = ops[ai].write;
    end else begin
      Htrans = HTRANS_IDLE;
      Haddr  = 32'h0;
      Hwrite = 1'b0;
    end
  end

  always @(posedge Hclk) begin
    if (running && Hreadyout) begin
      // data phase completes
      if (dp_valid) begin
        done_cycle[dp_idx] = cycle;
        if (ref_sel(ops[dp_idx].addr) == 3'b000) begin
          check(Hresp == 2'b10, $sformatf("op %0d unmapped: Hresp=%b", dp_idx, Hresp));
        end else begin
          check(Hresp == 2'b00, $sformatf("op %0d Hresp=%b", dp_idx, Hresp));
          if (!ops[dp_idx].write)
            check(Hrdata == slave_data(ops[dp_idx].addr),
                  $sformatf("op %0d read data %h exp %h", dp_idx, Hrdata,
                            slave_data(ops[dp_idx].addr)));
        end
      end
      // address phase completes
      if (ai < ops.size()) begin
        if (ops[ai].trans == HTRANS_NONSEQ || ops[ai].trans == HTRANS_SEQ) begin
          dp_valid <= 1'b1;
          dp_idx   <= ai;
          Hwdata   <= ops[ai].write ? ops[ai].wdata : 32'h0BAD_0BAD;
          accept_cycle[ai] = cycle;
        end else begin
          dp_valid <= 1'b0;
        end
        ai <= ai + 1;
      end else begin
        dp_valid <= 1'b0;
      end
    end
  end

  // ---------------- APB monitor ----------------
  logic        prev_pen;
  logic [2:0]  prev_sel;
  logic [31:0] prev_addr, prev_wdata;
  logic        prev_write;
  int          n_apb = 0;

  always @(posedge Hclk) begin
    if (Hresetn) begin
      if (Penableout) begin
        apb_exp_t e;
        n_apb++;
        check(!prev_pen && prev_sel != 0 && prev_sel == Pselxout &&
              prev_addr == Paddrout && prev_write == Pwriteout &&
              (!Pwriteout || prev_wdata == Pwdataout),
              "APB access cycle not preceded by a matching setup cycle");
        check(Pselxout != 0, "Penable without Pselx");
        if (apb_exp.size() == 0) begin
          check(0, $sformatf("unexpected APB transfer addr %h", Paddrout));
        end else begin
          e = apb_exp.pop_front();
          apb_cycle[e.op_idx] = cycle;
          check(Paddrout == e.addr && Pwriteout == e.write &&
                Pselxout == ref_sel(e.addr) &&
                (!e.write || Pwdataout == e.wdata),
                $sformatf("APB transfer addr %h w %b d %h sel %b, expected addr %h w %b d %h",
                          Paddrout, Pwriteout, Pwdataout, Pselxout, e.addr, e.write, e.wdata));
        end
      end
      prev_pen   <= Penableout;
      prev_sel   <= Pselxout;
      prev_addr  <= Paddrout;
      prev_write <= Pwriteout;
      prev_wdata <= Pwdataout;
    end
  end

  // ---------------- coverage of the FSM ----------------
  int st_cnt[8];
  int queued_read = 0;
  int err_cnt = 0;
  always @(posedge Hclk) if (Hresetn) begin
    st_cnt[dut.u_apb_fsm.state]++;
    if (dut.u_apb_fsm.state == ST_WENABLEP && !dut.hwritereg) queued_read++;
    if (Hresp == 2'b10) err_cnt++;
  end

  // ---------------- scenario runner ----------------
  task automatic run_ops();
    ai = 0; dp_valid = 0;
    foreach (ops[i])
      if ((ops[i].trans == HTRANS_NONSEQ || ops[i].trans == HTRANS_SEQ) &&
          ref_sel(ops[i].addr) != 0)
        apb_exp.push_back('{addr: ops[i].addr, write: ops[i].write,
                            wdata: ops[i].wdata, op_idx: i});
    @(negedge Hclk);
    running = 1;
    while (ai < ops.size() || dp_valid) @(negedge Hclk);
    repeat (6) @(negedge Hclk);
    running = 0;
    check(apb_exp.size() == 0, $sformatf("%0d APB transfers missing", apb_exp.size()));
    apb_exp.delete();
  endtask

  localparam logic [1:0] NS = HTRANS_NONSEQ, SQ = HTRANS_SEQ, ID = HTRANS_IDLE;

  initial begin
    Hresetn = 1'b0;
    Hwdata  = '0;
    prev_pen = 0; prev_sel = 0; prev_addr = 0; prev_write = 0; prev_wdata = 0;
    dp_valid = 0; ai = 0; dp_idx = 0;
    repeat (3) @(posedge Hclk);
    @(negedge Hclk) Hresetn = 1'b1;

    // 1. lone write then lone read (the published example addresses/data)
    ops.delete();
    ops.push_back(mk(NS, 1, 32'h8000_000C, 32'hFFFF_FFFF));
    ops.push_back(mk(ID, 0, 0, 0)); ops.push_back(mk(ID, 0, 0, 0));
    ops.push_back(mk(ID, 0, 0, 0)); ops.push_back(mk(ID, 0, 0, 0));
    ops.push_back(mk(NS, 0, 32'h8000_0008, 0));
    ops.push_back(mk(ID, 0, 0, 0)); ops.push_back(mk(ID, 0, 0, 0));
    ops.push_back(mk(ID, 0, 0, 0));
    run_ops();
    check(apb_cycle[0] - accept_cycle[0] == 3,
          $sformatf("lone write: APB access %0d cycles after address phase, expected 3",
                    apb_cycle[0] - accept_cycle[0]));
    check(done_cycle[5] - accept_cycle[5] == 2,
          $sformatf("lone read: data phase ended %0d cycles after address phase, expected 2",
                    done_cycle[5] - accept_cycle[5]));

    // 2. burst of back-to-back writes, then a read queued behind a write
    ops.delete(); accept_cycle.delete(); apb_cycle.delete(); done_cycle.delete();
    ops.push_back(mk(NS, 1, 32'h8400_0000, 32'h1111_0000));
    ops.push_back(mk(SQ, 1, 32'h8400_0004, 32'h1111_0001));
    ops.push_back(mk(SQ, 1, 32'h8400_0008, 32'h1111_0002));
    ops.push_back(mk(SQ, 1, 32'h8400_000C, 32'h1111_0003));
    ops.push_back(mk(NS, 0, 32'h8800_0010, 0));
    ops.push_back(mk(NS, 1, 32'h8000_0020, 32'h2222_0000));
    ops.push_back(mk(NS, 0, 32'h8000_0020, 0));
    ops.push_back(mk(NS, 1, 32'h8C00_0000, 32'h8765_4321));   // unmapped
    ops.push_back(mk(NS, 0, 32'h8800_0040, 0));
    run_ops();
    for (int i = 1; i < 4; i++)
      check(apb_cycle[i] - apb_cycle[i-1] == 2,
            $sformatf("write burst: APB transfers %0d and %0d are %0d cycles apart, expected 2",
                      i-1, i, apb_cycle[i] - apb_cycle[i-1]));

    // 3. write followed by a read while the write is still in its data phase
    ops.delete(); accept_cycle.delete(); apb_cycle.delete(); done_cycle.delete();
    ops.push_back(mk(NS, 1, 32'h8000_0100, 32'hCAFE_0001));
    ops.push_back(mk(NS, 0, 32'h8400_0104, 0));
    ops.push_back(mk(ID, 0, 0, 0));
    ops.push_back(mk(NS, 1, 32'h8800_0108, 32'hCAFE_0002));
    ops.push_back(mk(ID, 0, 0, 0));
    ops.push_back(mk(NS, 0, 32'h8000_010C, 0));
    run_ops();

    // 4. random traffic
    for (int r = 0; r < 20; r++) begin
      ops.delete(); accept_cycle.delete(); apb_cycle.delete(); done_cycle.delete();
      for (int i = 0; i < 40; i++) begin
        automatic int k = $urandom_range(0, 9);
        automatic logic [31:0] a;
        case ($urandom_range(0, 3))
          0: a = 32'h8000_0000;
          1: a = 32'h8400_0000;
          2: a = 32'h8800_0000;
          default: a = ($urandom_range(0, 5) == 0) ? 32'h8C00_0000 : 32'h8000_0000;
        endcase
        a[25:0] = 26'($urandom) & 26'h3FF_FFFC;
        if (k < 2) ops.push_back(mk(ID, 0, 0, 0));
        else ops.push_back(mk(k[0] ? NS : SQ, 1'($urandom_range(0, 1)), a, $urandom));
      end
      run_ops();
    end

    // mechanisms that must have been exercised
    foreach (st_cnt[s]) begin
      check(st_cnt[s] > 0, $sformatf("FSM state %0d never visited", s));
      $display("state %-12s visited %0d cycles", apb_state_e'(s), st_cnt[s]);
    end
    check(queued_read > 0, "no read queued behind a write (WENABLEP -> READ)");
    check(err_cnt > 0, "no error response produced");
    $display("APB transfers %0d, queued reads %0d, error responses %0d", n_apb, queued_read, err_cnt);

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
