// apb_fsm_controller -- the state machine at the heart of the AHB-to-APB bridge.
//
// Every AHB transfer that the slave interface marks Valid becomes one APB
// transfer: a setup cycle (Pselx set, Penable low) followed by an access cycle
// (Penable high). Reads go IDLE -> READ -> RENABLE. Writes must first wait for
// the AHB data phase, so they go IDLE -> WWAIT -> WRITE -> WENABLE. When a new
// AHB transfer arrives while a write is still being turned into APB cycles, the
// "pending" states WRITEP and WENABLEP keep it queued in the slave interface's
// pipeline register (Haddr1, Hwritereg) and issue it right after the current
// one, so back-to-back AHB writes are converted at the APB rate of one transfer
// per two cycles.
//
// Interface: AHB side Valid, Hwrite, Haddr, Hwdata (live bus), Haddr1,
// Hwritereg, tempselx (from the slave interface); Hreadyout back to the AHB
// master. APB side Pselx (one-hot), Penable, Pwrite, Paddr, Pwdata.
//
// Timing: the APB outputs are registered and change on the rising Hclk edge
// that enters a state. A read takes two Hclk cycles after its address phase
// (READ with Hreadyout = 0, RENABLE with Hreadyout = 1 and the read data
// returned). A write's address phase is followed by its data phase in WWAIT
// (Hreadyout = 1); WRITE/WRITEP is the APB setup cycle and WENABLE/WENABLEP
// the access cycle. Hreadyout is low in READ and WRITEP, and in WENABLEP when
// the queued transfer is a read, so that its data phase waits for Prdata.
// Reset is synchronous and active low.
//
// Following the published state diagram: the eight states and every labelled
// transition (Valid and Hwrite out of IDLE, RENABLE and WENABLE; Valid out of
// WWAIT and WRITE; Valid and Hwritereg out of WENABLEP) and the unlabelled
// READ -> RENABLE arc. This design's own choices: WRITEP always moves to
// WENABLEP and WENABLE returns to IDLE when Valid is low (the diagram prints no
// arc for either), the output values of each state, the Hreadyout schedule and
// the choice of Haddr1 for queued transfers.
module apb_fsm_controller
  import ahb_apb_pkg::*;
(
  input  logic              Hclk,
  input  logic              Hresetn,
  input  logic              Valid,
  input  logic              Hwrite,
  input  logic              Hwritereg,
  input  logic [ADDR_W-1:0] Haddr,
  input  logic [ADDR_W-1:0] Haddr1,
  input  logic [DATA_W-1:0] Hwdata,
  input  logic [SEL_W-1:0]  tempselx,
  output logic              Pwrite,
  output logic              Penable,
  output logic [SEL_W-1:0]  Pselx,
  output logic [ADDR_W-1:0] Paddr,
  output logic [DATA_W-1:0] Pwdata,
  output logic              Hreadyout
);

  apb_state_e state, next_state;

  // Next-state logic: the arcs of the state diagram.
  always_comb begin
    next_state = state;
    unique case (state)
      ST_IDLE:
        if (Valid && Hwrite)       next_state = ST_WWAIT;
        else if (Valid && !Hwrite) next_state = ST_READ;
        else                       next_state = ST_IDLE;
      ST_WWAIT:
        next_state = Valid ? ST_WRITEP : ST_WRITE;
      ST_READ:
        next_state = ST_RENABLE;
      ST_WRITE:
        next_state = Valid ? ST_WENABLEP : ST_WENABLE;
      ST_WRITEP:
        next_state = ST_WENABLEP;
      ST_RENABLE, ST_WENABLE:
        if (Valid && !Hwrite)      next_state = ST_READ;
        else if (Valid && Hwrite)  next_state = ST_WWAIT;
        else                       next_state = ST_IDLE;
      ST_WENABLEP:
        if (!Hwritereg)            next_state = ST_READ;
        else if (Valid)            next_state = ST_WRITEP;
        else                       next_state = ST_WRITE;
      default:
        next_state = ST_IDLE;
    endcase
  end

  // Registered APB outputs, set on entry to each state.
  always_ff @(posedge Hclk) begin
    if (!Hresetn) begin
      state   <= ST_IDLE;
      Pwrite  <= 1'b0;
      Penable <= 1'b0;
      Pselx   <= '0;
      Paddr   <= '0;
      Pwdata  <= '0;
    end else begin
      state <= next_state;
      unique case (next_state)
        ST_IDLE, ST_WWAIT: begin
          Pselx   <= '0;
          Penable <= 1'b0;
        end
        ST_READ: begin
          // A read queued in WENABLEP sits in the pipeline register; a read
          // from any other state is the address phase on the bus right now.
          if (state == ST_WENABLEP) begin
            Paddr <= Haddr1;
            Pselx <= decode_sel(Haddr1);
          end else begin
            Paddr <= Haddr;
            Pselx <= tempselx;
          end
          Pwrite  <= 1'b0;
          Penable <= 1'b0;
        end
        ST_WRITE, ST_WRITEP: begin
          // The write's data phase ends on this edge: take Hwdata now.
          Paddr   <= Haddr1;
          Pselx   <= decode_sel(Haddr1);
          Pwdata  <= Hwdata;
          Pwrite  <= 1'b1;
          Penable <= 1'b0;
        end
        ST_RENABLE, ST_WENABLE, ST_WENABLEP: begin
          Penable <= 1'b1;
        end
        default: begin
          Pselx   <= '0;
          Penable <= 1'b0;
        end
      endcase
    end
  end

  always_comb begin
    unique case (state)
      ST_READ, ST_WRITEP: Hreadyout = 1'b0;
      ST_WENABLEP:        Hreadyout = Hwritereg;
      default:            Hreadyout = 1'b1;
    endcase
  end

endmodule
