// hs4_master: requester side of the CK / RDY / Q_V four-phase handshake used
// by the TP-SRAM ports.
//
// A synchronous client pulses nothing: it holds `req` with `we`, `addr` and
// `wdata` until `done` pulses for one cycle (with `rdata` for reads). The
// module then plays the protocol of the TP-SRAM ports: with RDY high it
// presents the address and raises CK; when RDY falls (operation accepted)
// it lowers CK; the operation ends when RDY is high again and, for a read,
// Q_V is high, at which point Q is captured. The address, data and write
// strobe stay stable from CK rising until RDY falls (bundled data).
// RDY and Q_V are brought in through SYNC flip-flops each, so the responder
// may run on another clock or be self-timed; Q is sampled once Q_V has been
// synchronised, so it is already stable.
// Timing: with SYNC=2 and a responder on the same clock, one access takes
// about 2*SYNC + responder latency + 2 cycles.
module hs4_master #(
  parameter int unsigned AW   = 11,
  parameter int unsigned DW   = 32,
  parameter int unsigned SYNC = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // client side
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic          done,
  output logic [DW-1:0] rdata,
  output logic          idle,
  // four-phase side
  output logic          ck,
  output logic          hs_we,
  output logic [AW-1:0] hs_addr,
  output logic [DW-1:0] hs_wdata,
  input  logic          rdy,
  input  logic [DW-1:0] q,
  input  logic          q_v
);

  typedef enum logic [1:0] {S_IDLE, S_CK_HIGH, S_WAIT_END, S_DONE} state_e;
  state_e state;

  logic [SYNC-1:0] rdy_sr, qv_sr;
  logic rdy_s, qv_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdy_sr <= '0;
      qv_sr  <= '0;
    end else begin
      rdy_sr <= {rdy_sr[SYNC-2:0], rdy};
      qv_sr  <= {qv_sr[SYNC-2:0], q_v};
    end
  end
  assign rdy_s = rdy_sr[SYNC-1];
  assign qv_s  = qv_sr[SYNC-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ck       <= 1'b0;
      hs_we    <= 1'b0;
      hs_addr  <= '0;
      hs_wdata <= '0;
      rdata    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req && rdy_s) begin
          hs_we    <= we;
          hs_addr  <= addr;
          hs_wdata <= wdata;
          ck       <= 1'b1;
          state    <= S_CK_HIGH;
        end
        S_CK_HIGH: if (!rdy_s) begin
          ck    <= 1'b0;
          state <= S_WAIT_END;
        end
        S_WAIT_END: if (rdy_s && (hs_we || qv_s)) begin
          rdata <= q;
          state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_DONE);
  assign idle = (state == S_IDLE);

endmodule
