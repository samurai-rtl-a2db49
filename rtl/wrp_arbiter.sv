// wrp_arbiter: sharing of the TP-SRAM write/read port (WRP) between the
// Wake-up Controller (WuC) and the On-Demand AHB bus.
//
// The WuC reads through the TP-SRAM read port; its writes come here, as a
// four-phase channel (CK / RDY / Q / Q_V, the protocol of a TP-SRAM port).
//   * Direct mode (sync_mode = 0, OD part off or held in reset): the WuC
//     channel is wired straight to the WRP, so WuC writes stay fully
//     asynchronous.
//   * Synchronous mode (sync_mode = 1): the WuC channel enters a
//     four-phase-to-synchronous converter clocked by clk_od, and a
//     round-robin arbiter on clk_od gives the WRP to either the converted WuC
//     request or the AHB request. The winner's access is played on the WRP by
//     an hs4_master, so the WRP is then paced by clk_od.
// sync_mode comes from the OD reset handshake (OD_reset_ack), which is how
// the arbitration policy is switched; the switch is only safe with no WuC
// write in flight, which the WuC software guarantees by switching from its
// own code. The AHB side is reduced to a hold-until-done request (`ahb_req`
// held until the one-cycle `ahb_done`); an AHB-Lite slave wrapper would sit
// in front of it. Round-robin between two requesters: after a grant to one,
// the other wins the next tie.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module wrp_arbiter #(
  parameter int unsigned AW = 11,
  parameter int unsigned DW = 32
) (
  input  logic          clk_od,
  input  logic          od_rst_n,
  input  logic          sync_mode,
  // WuC write channel (four-phase)
  input  logic          wuc_ck,
  input  logic          wuc_we,
  input  logic [AW-1:0] wuc_addr,
  input  logic [DW-1:0] wuc_wdata,
  output logic          wuc_rdy,
  output logic [DW-1:0] wuc_q,
  output logic          wuc_q_v,
  // AHB side (clk_od)
  input  logic          ahb_req,
  input  logic          ahb_we,
  input  logic [AW-1:0] ahb_addr,
  input  logic [DW-1:0] ahb_wdata,
  output logic          ahb_done,
  output logic [DW-1:0] ahb_rdata,
  // TP-SRAM write/read port
  output logic          wrp_ck,
  output logic          wrp_we,
  output logic [AW-1:0] wrp_addr,
  output logic [DW-1:0] wrp_wdata,
  input  logic          wrp_rdy,
  input  logic [DW-1:0] wrp_q,
  input  logic          wrp_q_v,
  // observation: grants given in synchronous mode
  output logic          gnt_wuc_o,
  output logic          gnt_ahb_o
);

  // ---- WuC channel converted to clk_od ------------------------------------
  logic          c_rdy, c_q_v;
  logic [DW-1:0] c_q;
  logic          c_req, c_we, c_done;
  logic [AW-1:0] c_addr;
  logic [DW-1:0] c_wdata;

  hs4_sync_conv #(.AW(AW), .DW(DW)) u_conv (
    .clk(clk_od), .rst_n(od_rst_n),
    .ck(wuc_ck && sync_mode), .we(wuc_we), .addr(wuc_addr), .wdata(wuc_wdata),
    .rdy(c_rdy), .q(c_q), .q_v(c_q_v),
    .sreq(c_req), .swe(c_we), .saddr(c_addr), .swdata(c_wdata),
    .sdone(c_done), .srdata(ahb_rdata)
  );

  // ---- round-robin arbiter ----------------------------------------------
  typedef enum logic [1:0] {G_NONE, G_WUC, G_AHB} gnt_e;
  gnt_e gnt;
  logic last_wuc;   // the WuC had the previous grant
  logic m_done, m_idle;

  always_ff @(posedge clk_od or negedge od_rst_n) begin
    if (!od_rst_n) begin
      gnt      <= G_NONE;
      last_wuc <= 1'b0;
    end else if (gnt == G_NONE) begin
      if (m_idle) begin
        if (c_req && ahb_req) gnt <= last_wuc ? G_AHB : G_WUC;
        else if (c_req)       gnt <= G_WUC;
        else if (ahb_req)     gnt <= G_AHB;
      end
    end else if (m_done) begin
      last_wuc <= (gnt == G_WUC);
      gnt      <= G_NONE;
    end
  end

  assign gnt_wuc_o = (gnt == G_WUC) && m_done;
  assign gnt_ahb_o = (gnt == G_AHB) && m_done;
  assign c_done    = (gnt == G_WUC) && m_done;
  assign ahb_done  = (gnt == G_AHB) && m_done;

  logic          m_ck, m_we;
  logic [AW-1:0] m_addr;
  logic [DW-1:0] m_wdata;

  hs4_master #(.AW(AW), .DW(DW), .SYNC(2)) u_master (
    .clk(clk_od), .rst_n(od_rst_n),
    .req(gnt != G_NONE),
    .we   (gnt == G_WUC ? c_we    : ahb_we),
    .addr (gnt == G_WUC ? c_addr  : ahb_addr),
    .wdata(gnt == G_WUC ? c_wdata : ahb_wdata),
    .done(m_done), .rdata(ahb_rdata), .idle(m_idle),
    .ck(m_ck), .hs_we(m_we), .hs_addr(m_addr), .hs_wdata(m_wdata),
    .rdy(wrp_rdy), .q(wrp_q), .q_v(wrp_q_v)
  );

  // ---- port multiplexer ---------------------------------------------------
  always_comb begin
    if (sync_mode) begin
      wrp_ck    = m_ck;
      wrp_we    = m_we;
      wrp_addr  = m_addr;
      wrp_wdata = m_wdata;
      wuc_rdy   = c_rdy;
      wuc_q     = c_q;
      wuc_q_v   = c_q_v;
    end else begin
      wrp_ck    = wuc_ck;
      wrp_we    = wuc_we;
      wrp_addr  = wuc_addr;
      wrp_wdata = wuc_wdata;
      wuc_rdy   = wrp_rdy;
      wuc_q     = wrp_q;
      wuc_q_v   = wrp_q_v;
    end
  end

  a_one_grant: assert property (@(posedge clk_od) disable iff (!od_rst_n)
    !(c_done && ahb_done));

endmodule
