// wuc_cfg_regs: configuration (CFG) registers of the Wake-up Controller.
//
// Through these registers the WuC selects the node power mode and drives the
// external power switches, gates the On-Demand (OD) clocks, sets the FLL,
// holds or releases the OD reset, starts the RISC-V core (fetch enable and
// boot address) and configures the wake-up radio (WuR) and the digital
// baseband (DBB). Word registers, offsets from samurai_pkg:
//   0 PMODE   power mode (power_mode_e)           1 ODCTRL [0] OD clock enable,
//   2 BOOT    RISC-V boot address                   [1] OD reset request,
//   3 FLL     FLL setting (opaque)                  [2] RISC-V fetch enable,
//   4 DBB_SYM symbol width in clk cycles            [3] WuR on in OD modes
//   5 DBB_DLY sampling delay in the symbol        6 DBB_ID wake-up identifier
//   7 WUR     WuR gain / band setting (opaque)    8 STATUS [0] OD_reset_ack (RO)
//   9 DBB_PAY last DBB payload (RO)
// The power mode maps to the supply and clock controls as in the node's
// power-mode table: WuR on in WuC+WuR mode (and optionally in the OD modes);
// OD supplied in WuC+Periph and CPU-running modes; in WuC+Periph the CPU
// clock is gated and only the peripheral clock runs; in CPU-running mode the
// TP-SRAM supply is linked to the OD supply. The register map, reset values
// and field layout are choices of this design. Register bus: a one-cycle
// `req` with `we`, `addr`, `wdata`; `rdata` is combinational on `addr`.
module wuc_cfg_regs
  import samurai_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [3:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  // status inputs
  input  logic        od_reset_ack,
  input  logic [31:0] dbb_payload,
  // controls
  output power_mode_e pmode,
  output pwr_ctrl_t   pwr,
  output logic        od_reset_req,
  output logic        riscv_fetch_en,
  output logic [31:0] riscv_boot_addr,
  output logic [15:0] fll_cfg,
  output logic [15:0] dbb_sym_width,
  output logic [15:0] dbb_data_delay,
  output logic [7:0]  dbb_id,
  output logic [15:0] wur_cfg
);

  logic [3:0] odctrl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pmode           <= PM_IDLE;
      odctrl          <= 4'b0010;   // OD held in reset
      riscv_boot_addr <= '0;
      fll_cfg         <= '0;
      dbb_sym_width   <= 16'd8;
      dbb_data_delay  <= 16'd4;
      dbb_id          <= '0;
      wur_cfg         <= '0;
    end else if (req && we) begin
      unique case (addr)
        CFG_PMODE:   pmode           <= power_mode_e'(wdata[2:0]);
        CFG_ODCTRL:  odctrl          <= wdata[3:0];
        CFG_BOOT:    riscv_boot_addr <= wdata;
        CFG_FLL:     fll_cfg         <= wdata[15:0];
        CFG_DBB_SYM: dbb_sym_width   <= wdata[15:0];
        CFG_DBB_DLY: dbb_data_delay  <= wdata[15:0];
        CFG_DBB_ID:  dbb_id          <= wdata[7:0];
        CFG_WUR:     wur_cfg         <= wdata[15:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (addr)
      CFG_PMODE:   rdata = {29'd0, pmode};
      CFG_ODCTRL:  rdata = {28'd0, odctrl};
      CFG_BOOT:    rdata = riscv_boot_addr;
      CFG_FLL:     rdata = {16'd0, fll_cfg};
      CFG_DBB_SYM: rdata = {16'd0, dbb_sym_width};
      CFG_DBB_DLY: rdata = {16'd0, dbb_data_delay};
      CFG_DBB_ID:  rdata = {24'd0, dbb_id};
      CFG_WUR:     rdata = {16'd0, wur_cfg};
      CFG_STATUS:  rdata = {31'd0, od_reset_ack};
      CFG_DBB_PAY: rdata = dbb_payload;
      default:     rdata = '0;
    endcase
  end

  // power-mode table
  always_comb begin
    pwr = '0;
    unique case (pmode)
      PM_IDLE, PM_WUC_ONLY: ;
      PM_WUC_WUR: pwr.wur_on = 1'b1;
      PM_WUC_PERIPH: begin
        pwr.wur_on        = odctrl[3];
        pwr.od_on         = 1'b1;
        pwr.periph_clk_en = odctrl[0];
      end
      PM_CPU_RUN: begin
        pwr.wur_on        = odctrl[3];
        pwr.od_on         = 1'b1;
        pwr.tps_linked    = 1'b1;
        pwr.cpu_clk_en    = odctrl[0];
        pwr.periph_clk_en = odctrl[0];
      end
      default: ;
    endcase
  end

  assign od_reset_req   = odctrl[1] || !pwr.od_on;
  assign riscv_fetch_en = odctrl[2] && pwr.cpu_clk_en && od_reset_ack;

endmodule
