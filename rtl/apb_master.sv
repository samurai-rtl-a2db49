// apb_master: APB requester used by the bridge from the Wake-up Controller
// into the On-Demand (OD) peripherals.
//
// The WuC side reaches it through an hs4_sync_conv (four-phase handshake to
// the synchronous OD clock); this block turns each held request (`sreq`
// with `swe`, word address `saddr`, `swdata`) into one APB transfer: a SETUP
// cycle (PSEL high), then ACCESS cycles (PENABLE high) until PREADY, where
// PRDATA is captured and `sdone` pulses. PADDR is the byte address
// (word address * 4). PSLVERR is reported on `err` for the transfer and is
// otherwise ignored.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module apb_master #(
  parameter int unsigned AW = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sreq,
  input  logic          swe,
  input  logic [AW-1:0] saddr,
  input  logic [31:0]   swdata,
  output logic          sdone,
  output logic [31:0]   srdata,
  output logic          err,
  // APB
  output logic          psel,
  output logic          penable,
  output logic          pwrite,
  output logic [31:0]   paddr,
  output logic [31:0]   pwdata,
  input  logic [31:0]   prdata,
  input  logic          pready,
  input  logic          pslverr
);

  typedef enum logic [1:0] {A_IDLE, A_SETUP, A_ACCESS, A_DONE} astate_e;
  astate_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= A_IDLE;
      pwrite <= 1'b0;
      paddr  <= '0;
      pwdata <= '0;
      srdata <= '0;
      err    <= 1'b0;
    end else begin
      unique case (state)
        A_IDLE: if (sreq) begin
          pwrite <= swe;
          paddr  <= 32'(saddr) << 2;
          pwdata <= swdata;
          state  <= A_SETUP;
        end
        A_SETUP:  state <= A_ACCESS;
        A_ACCESS: if (pready) begin
          srdata <= prdata;
          err    <= pslverr;
          state  <= A_DONE;
        end
        A_DONE:   state <= A_IDLE;
        default:  state <= A_IDLE;
      endcase
    end
  end

  assign psel    = (state == A_SETUP) || (state == A_ACCESS);
  assign penable = (state == A_ACCESS);
  assign sdone   = (state == A_DONE);

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (psel && !penable) |=> (psel && penable));

endmodule
