// wuc_sysbus: local interconnect of the Wake-up Controller (WuC).
//
// Two requesters share it: the event scheduler (port s_*, for the first
// instruction fetch after a wake-up) and the WuC execution core (port c_*).
// The scheduler wins a tie; a transfer, once started, is never interrupted.
// Both use the same hold-until-ready protocol: `req` with `we`, a 16-bit
// word address and `wdata` are held until `ready` pulses; `rdata` is valid
// with `ready` and stays valid until the next transfer completes.
// Word-address bits [15:13] select the target (samurai_pkg::region_e):
//   0 TP-SRAM: reads go to the TP-SRAM read port (RP), writes to the
//     write/read port channel (WRP, through the WRP arbiter), each as a
//     four-phase CK/RDY/Q_V transfer, so the WuC can fetch on RP while a
//     write is under way on WRP from another requester;
//   1 CFG registers, 2 GPIO, 3 IT controller: one-cycle register bus
//     (`reg_req` strobe with `reg_sel`), answered in the same cycle;
//   4..7 the OD APB peripherals, as a four-phase transfer to the APB
//     bridge (13-bit word address).
// The address map is this design's choice.
module wuc_sysbus
  import samurai_pkg::*;
#(
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  // scheduler port
  input  logic          s_req,
  input  logic [15:0]   s_addr,
  output logic          s_ready,
  output logic [31:0]   s_rdata,
  // core port
  input  logic          c_req,
  input  logic          c_we,
  input  logic [15:0]   c_addr,
  input  logic [31:0]   c_wdata,
  output logic          c_ready,
  output logic [31:0]   c_rdata,
  // register bus to CFG / GPIO / IT
  output logic          reg_req,
  output logic          reg_we,
  output region_e       reg_sel,
  output logic [3:0]    reg_addr,
  output logic [31:0]   reg_wdata,
  input  logic [31:0]   cfg_rdata,
  input  logic [31:0]   gpio_rdata,
  input  logic [31:0]   irq_rdata,
  // TP-SRAM read port
  output logic          rp_ck,
  output logic [AW-1:0] rp_addr,
  input  logic          rp_rdy,
  input  logic [31:0]   rp_q,
  input  logic          rp_q_v,
  // TP-SRAM write channel
  output logic          wc_ck,
  output logic          wc_we,
  output logic [AW-1:0] wc_addr,
  output logic [31:0]   wc_wdata,
  input  logic          wc_rdy,
  input  logic [31:0]   wc_q,
  input  logic          wc_q_v,
  // APB bridge channel
  output logic          ap_ck,
  output logic          ap_we,
  output logic [12:0]   ap_addr,
  output logic [31:0]   ap_wdata,
  input  logic          ap_rdy,
  input  logic [31:0]   ap_q,
  input  logic          ap_q_v
);

  typedef enum logic [2:0] {B_IDLE, B_REG, B_RP, B_WC, B_AP} bstate_e;
  bstate_e state;
  logic    own_s;          // current transfer belongs to the scheduler

  logic        m_req, m_we;
  logic [15:0] m_addr;
  logic [31:0] m_wdata;
  always_comb begin
    if (own_s) begin
      m_req = s_req; m_we = 1'b0; m_addr = s_addr; m_wdata = '0;
    end else begin
      m_req = c_req; m_we = c_we; m_addr = c_addr; m_wdata = c_wdata;
    end
  end

  region_e rgn;
  assign rgn = m_addr[15] ? RGN_APB : region_e'(m_addr[15:13]);

  logic rp_done, wc_done, ap_done;
  logic [31:0] rp_rd, wc_rd, ap_rd;
  logic ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      own_s <= 1'b0;
    end else begin
      unique case (state)
        B_IDLE: begin
          if (s_req || c_req) begin
            own_s <= s_req;
            state <= B_REG;   // decoded in the next cycle, once own_s is set
          end
        end
        B_REG: begin
          unique case (rgn)
            RGN_TPS: state <= m_we ? B_WC : B_RP;
            RGN_APB: state <= B_AP;
            default: state <= B_IDLE;   // register access completes now
          endcase
        end
        B_RP: if (rp_done) state <= B_IDLE;
        B_WC: if (wc_done) state <= B_IDLE;
        B_AP: if (ap_done) state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  // register bus
  assign reg_req   = (state == B_REG) && rgn != RGN_TPS && rgn != RGN_APB;
  assign reg_we    = m_we;
  assign reg_sel   = rgn;
  assign reg_addr  = m_addr[3:0];
  assign reg_wdata = m_wdata;

  logic [31:0] reg_rd;
  always_comb begin
    unique case (rgn)
      RGN_CFG:  reg_rd = cfg_rdata;
      RGN_GPIO: reg_rd = gpio_rdata;
      RGN_IRQ:  reg_rd = irq_rdata;
      default:  reg_rd = '0;
    endcase
  end

  hs4_master #(.AW(AW), .DW(32)) u_rp (
    .clk, .rst_n, .req(state == B_RP), .we(1'b0), .addr(m_addr[AW-1:0]),
    .wdata('0), .done(rp_done), .rdata(rp_rd), .idle(),
    .ck(rp_ck), .hs_we(), .hs_addr(rp_addr), .hs_wdata(),
    .rdy(rp_rdy), .q(rp_q), .q_v(rp_q_v)
  );

  hs4_master #(.AW(AW), .DW(32)) u_wc (
    .clk, .rst_n, .req(state == B_WC), .we(1'b1), .addr(m_addr[AW-1:0]),
    .wdata(m_wdata), .done(wc_done), .rdata(wc_rd), .idle(),
    .ck(wc_ck), .hs_we(wc_we), .hs_addr(wc_addr), .hs_wdata(wc_wdata),
    .rdy(wc_rdy), .q(wc_q), .q_v(wc_q_v)
  );

  hs4_master #(.AW(13), .DW(32)) u_ap (
    .clk, .rst_n, .req(state == B_AP), .we(m_we), .addr(m_addr[12:0]),
    .wdata(m_wdata), .done(ap_done), .rdata(ap_rd), .idle(),
    .ck(ap_ck), .hs_we(ap_we), .hs_addr(ap_addr), .hs_wdata(ap_wdata),
    .rdy(ap_rdy), .q(ap_q), .q_v(ap_q_v)
  );

  logic [31:0] rd;
  always_comb begin
    ready = 1'b0;
    rd    = '0;
    unique case (state)
      B_REG: if (reg_req) begin ready = 1'b1; rd = reg_rd; end
      B_RP:  begin ready = rp_done; rd = rp_rd; end
      B_WC:  begin ready = wc_done; rd = wc_rd; end
      B_AP:  begin ready = ap_done; rd = ap_rd; end
      default: ;
    endcase
  end

  assign s_ready = ready && own_s;
  assign c_ready = ready && !own_s;
  // read data is valid with `ready` and held until the next transfer ends
  logic [31:0] rd_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_q <= '0;
    else if (ready) rd_q <= rd;
  end
  assign s_rdata = ready ? rd : rd_q;
  assign c_rdata = ready ? rd : rd_q;

endmodule
