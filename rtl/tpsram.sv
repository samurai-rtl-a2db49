// tpsram: the 8 kB two-port SRAM that sits between the always-responsive
// (AR) and on-demand (OD) sub-systems.
//
// Two ports share one array of WORDS x DW bits:
//   * WRP, the write/read port (six-transistor side of the bit cell),
//   * RP, the read-only port (two-transistor read stack of the bit cell).
// Both ports run the same four-phase handshake: the requester presents the
// address and raises CK; the memory lowers Q_V, registers the address,
// starts the access and lowers RDY; the requester lowers CK; when the access
// is done the memory drives Q and raises Q_V (reads only), and raises RDY
// again once CK is low. On WRP a write leaves Q / Q_V untouched.
// A third handshake manages the periphery power: lowering SLEEP_REQ powers
// the periphery up and SLEEP_ACK rises once operations can start; raising
// SLEEP_REQ (with both ports idle) lowers SLEEP_ACK and powers it off. The
// array itself is retentive and keeps its contents while asleep.
//
// The silicon memory is self-timed. Here its internal sequencing is a
// synchronous state machine on `clk`; CK and SLEEP_REQ pass through two
// synchronising flip-flops, so the requesters may be on other clocks.
// WAKE_CYCLES models the periphery power-up delay and ACCESS_CYCLES the
// array access time. RDY is held low while asleep (the memory cannot
// accept an operation then); that choice, the word width and the absence of
// byte enables are this design's, not the paper's. Low-voltage limits of
// the bit cell (no WRP read below about 0.4 V) are electrical and not
// modelled.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module tpsram #(
  parameter int unsigned WORDS         = 2048,
  parameter int unsigned DW            = 32,
  parameter int unsigned WAKE_CYCLES   = 2,
  parameter int unsigned ACCESS_CYCLES = 1,
  localparam int unsigned AW           = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // power management
  input  logic          sleep_req,
  output logic          sleep_ack,
  // write/read port
  input  logic          wrp_ck,
  input  logic          wrp_we,
  input  logic [AW-1:0] wrp_addr,
  input  logic [DW-1:0] wrp_wdata,
  output logic          wrp_rdy,
  output logic [DW-1:0] wrp_q,
  output logic          wrp_q_v,
  // read port
  input  logic          rp_ck,
  input  logic [AW-1:0] rp_addr,
  output logic          rp_rdy,
  output logic [DW-1:0] rp_q,
  output logic          rp_q_v
);

  logic [DW-1:0] mem [WORDS];

  // ---- synchronisers -------------------------------------------------------
  logic [1:0] sreq_sr, wck_sr, rck_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreq_sr <= 2'b11;
      wck_sr  <= '0;
      rck_sr  <= '0;
    end else begin
      sreq_sr <= {sreq_sr[0], sleep_req};
      wck_sr  <= {wck_sr[0], wrp_ck};
      rck_sr  <= {rck_sr[0], rp_ck};
    end
  end
  logic sreq_s, wck_s, rck_s;
  assign sreq_s = sreq_sr[1];
  assign wck_s  = wck_sr[1];
  assign rck_s  = rck_sr[1];

  // ---- power state -----------------------------------------------------------
  typedef enum logic [1:0] {P_SLEEP, P_WAKING, P_ON} pstate_e;
  pstate_e pstate;
  logic [$clog2(WAKE_CYCLES+1)-1:0] wake_cnt;
  logic awake, ports_idle;

  typedef enum logic [1:0] {OP_IDLE, OP_ACCESS, OP_WAIT_CK} opstate_e;
  opstate_e wps, rps;

  assign awake      = (pstate == P_ON);
  assign ports_idle = (wps == OP_IDLE) && (rps == OP_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate    <= P_SLEEP;
      wake_cnt  <= '0;
      sleep_ack <= 1'b0;
    end else begin
      unique case (pstate)
        P_SLEEP: if (!sreq_s) begin
          pstate   <= P_WAKING;
          wake_cnt <= '0;
        end
        P_WAKING: begin
          if (wake_cnt == WAKE_CYCLES[$bits(wake_cnt)-1:0]) begin
            pstate    <= P_ON;
            sleep_ack <= 1'b1;
          end else begin
            wake_cnt <= wake_cnt + 1'b1;
          end
        end
        P_ON: if (sreq_s && ports_idle && !wck_s && !rck_s) begin
          pstate    <= P_SLEEP;
          sleep_ack <= 1'b0;
        end
        default: pstate <= P_SLEEP;
      endcase
    end
  end

  // ---- write/read port -------------------------------------------------------
  logic [AW-1:0] wa_q;
  logic [DW-1:0] wd_q;
  logic          we_q;
  logic [$clog2(ACCESS_CYCLES+1)-1:0] wcnt, rcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wps     <= OP_IDLE;
      wrp_rdy <= 1'b0;
      wrp_q_v <= 1'b0;
      wrp_q   <= '0;
      wa_q    <= '0;
      wd_q    <= '0;
      we_q    <= 1'b0;
      wcnt    <= '0;
    end else begin
      unique case (wps)
        OP_IDLE: begin
          wrp_rdy <= awake && !sreq_s;
          if (awake && wrp_rdy && wck_s) begin
            wa_q    <= wrp_addr;
            wd_q    <= wrp_wdata;
            we_q    <= wrp_we;
            if (!wrp_we) wrp_q_v <= 1'b0;
            wrp_rdy <= 1'b0;
            wcnt    <= '0;
            wps     <= OP_ACCESS;
          end
        end
        OP_ACCESS: begin
          if (wcnt == ACCESS_CYCLES[$bits(wcnt)-1:0] - 1'b1) begin
            if (!we_q) begin
              wrp_q   <= mem[wa_q];
              wrp_q_v <= 1'b1;
            end
            wps <= OP_WAIT_CK;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        OP_WAIT_CK: if (!wck_s) begin
          wrp_rdy <= 1'b1;
          wps     <= OP_IDLE;
        end
        default: wps <= OP_IDLE;
      endcase
    end
  end

  // array write, kept out of the reset process so the array stays a memory
  logic mem_we;
  assign mem_we = (wps == OP_ACCESS) && we_q &&
                  (wcnt == ACCESS_CYCLES[$bits(wcnt)-1:0] - 1'b1);
  always_ff @(posedge clk) begin
    if (mem_we) mem[wa_q] <= wd_q;
  end

  // ---- read port -----------------------------------------------------------------
  logic [AW-1:0] ra_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rps    <= OP_IDLE;
      rp_rdy <= 1'b0;
      rp_q_v <= 1'b0;
      rp_q   <= '0;
      ra_q   <= '0;
      rcnt   <= '0;
    end else begin
      unique case (rps)
        OP_IDLE: begin
          rp_rdy <= awake && !sreq_s;
          if (awake && rp_rdy && rck_s) begin
            ra_q   <= rp_addr;
            rp_q_v <= 1'b0;
            rp_rdy <= 1'b0;
            rcnt   <= '0;
            rps    <= OP_ACCESS;
          end
        end
        OP_ACCESS: begin
          if (rcnt == ACCESS_CYCLES[$bits(rcnt)-1:0] - 1'b1) begin
            rp_q   <= mem[ra_q];
            rp_q_v <= 1'b1;
            rps    <= OP_WAIT_CK;
          end else begin
            rcnt <= rcnt + 1'b1;
          end
        end
        OP_WAIT_CK: if (!rck_s) begin
          rp_rdy <= 1'b1;
          rps    <= OP_IDLE;
        end
        default: rps <= OP_IDLE;
      endcase
    end
  end

  // RDY stays low from acceptance until the access has completed.
  a_rp_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (rps == OP_ACCESS) |-> !rp_rdy);
  a_wrp_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (wps == OP_ACCESS) |-> !wrp_rdy);

endmodule
