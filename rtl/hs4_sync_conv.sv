// hs4_sync_conv: four-phase to synchronous protocol converter.
//
// On its four-phase side the converter behaves exactly like a TP-SRAM port
// (CK in; RDY, Q, Q_V out), so the clock-less Wake-up Controller can talk to
// it unchanged. On its synchronous side, clocked by the On-Demand clock, it
// raises `sreq` with the captured address, data and write strobe and holds
// it until the synchronous target answers with a one-cycle `sdone` (and
// `srdata` for a read). CK is brought into the clock domain by two
// flip-flops; the address and data are captured when the synchronised CK is
// seen high (bundled data: the requester keeps them stable until RDY falls).
// Sequence: CK seen high -> capture, Q_V low, RDY low, sreq high;
// sdone -> Q / Q_V driven; CK seen low -> RDY high.
// The same converter serves the WuC writes into the TP-SRAM write port when
// the OD part is on, and the WuC bridge into the OD APB peripherals. RDY is
// held low while the synchronous side is in reset.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module hs4_sync_conv #(
  parameter int unsigned AW = 11,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // four-phase (requester) side
  input  logic          ck,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic          rdy,
  output logic [DW-1:0] q,
  output logic          q_v,
  // synchronous side
  output logic          sreq,
  output logic          swe,
  output logic [AW-1:0] saddr,
  output logic [DW-1:0] swdata,
  input  logic          sdone,
  input  logic [DW-1:0] srdata
);

  typedef enum logic [1:0] {C_IDLE, C_REQ, C_WAIT_CK} cstate_e;
  cstate_e state;

  logic [1:0] ck_sr;
  logic ck_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ck_sr <= '0;
    else        ck_sr <= {ck_sr[0], ck};
  end
  assign ck_s = ck_sr[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      rdy    <= 1'b0;
      q      <= '0;
      q_v    <= 1'b0;
      sreq   <= 1'b0;
      swe    <= 1'b0;
      saddr  <= '0;
      swdata <= '0;
    end else begin
      unique case (state)
        C_IDLE: begin
          rdy <= 1'b1;
          if (rdy && ck_s) begin
            saddr  <= addr;
            swdata <= wdata;
            swe    <= we;
            if (!we) q_v <= 1'b0;
            rdy    <= 1'b0;
            sreq   <= 1'b1;
            state  <= C_REQ;
          end
        end
        C_REQ: if (sdone) begin
          sreq <= 1'b0;
          if (!swe) begin
            q   <= srdata;
            q_v <= 1'b1;
          end
          state <= C_WAIT_CK;
        end
        C_WAIT_CK: if (!ck_s) begin
          rdy   <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_sreq_held: assert property (@(posedge clk) disable iff (!rst_n)
    (sreq && !sdone) |=> sreq);

endmodule
