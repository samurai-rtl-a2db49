// samurai_top: SamurAI IoT node, always-responsive sub-system, TP-SRAM and
// the On-Demand blocks built here, wired as in the node architecture.
//
// Always-responsive (AR) part, on `clk`:
//   wuc_scheduler (run-to-completion event front end of the Wake-up Core),
//   wuc_sysbus (WuC local bus), wuc_cfg_regs, wuc_gpio, wuc_irq_ctrl, dbb.
// Shared memory: tpsram, 8 kB, its read port owned by the WuC, its write/read
// port shared with the OD AHB bus through wrp_arbiter.
// On-Demand (OD) part, on `clk_od`: the WRP arbiter, the APB bridge
// (hs4_sync_conv + apb_master) into the OD peripherals, the OD reset
// handshake, the NVM controller (nvm_icache instruction cache and
// feram_ctrl FeRAM controller with its SPI master) and one PNeuro neural
// compute block (pnu_ncb: 8 processing
// elements and 32 kB of banked SRAM), reset with the OD domain.
// Parts that are not built here are reached through ports: the WuC
// execution core (exec_* and core_* ports: it receives the interrupt number
// and first instruction word of each routine, then uses the system bus),
// the wake-up radio analog front end (`wur_rx`, demodulated OOK bits), the
// RISC-V core (AHB-side TP-SRAM port, instruction fetch port, NVM data
// port, boot address and fetch enable), the PNeuro cluster controller
// (`ncb_*` layer command and host ports), the APB peripherals, the FLL
// (`clk_od` is an input; `fll_cfg` its setting) and the external power
// switches and clock gates (`pwr`).
// In silicon the WuC and TP-SRAM are clock-less; here `clk` stands for
// their self-timed sequencing. Four-phase handshakes with synchronisers
// join the AR and OD clock domains.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
// The cache hit and miss strobes (ic_hit, ic_miss) are kept as observation
// points for performance counting and are not used inside the top.
module samurai_top
  import samurai_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clk_od,
  // WuC GPIO pads
  input  logic [7:0]  gpio_pad_in,
  output logic [7:0]  gpio_pad_out,
  output logic [7:0]  gpio_pad_oe,
  // wake-up radio
  input  logic        wur_rx,
  output logic [15:0] wur_cfg,
  // power and clock control
  output power_mode_e pmode,
  output pwr_ctrl_t   pwr,
  output logic [15:0] fll_cfg,
  // WuC execution core
  input  logic        core_req,
  input  logic        core_we,
  input  logic [15:0] core_addr,
  input  logic [31:0] core_wdata,
  output logic        core_ready,
  output logic [31:0] core_rdata,
  output logic        exec_start,
  output logic [3:0]  exec_id,
  output logic [31:0] exec_instr,
  input  logic        exec_done,
  output logic        wuc_idle,
  output logic [15:0] wake_cycles,
  // OD domain control
  input  logic [2:0]  od_irq,
  output logic        od_rst_n,
  output logic        od_reset_ack,
  output logic        riscv_fetch_en,
  output logic [31:0] riscv_boot_addr,
  // AHB access to the TP-SRAM (clk_od)
  input  logic        ahb_req,
  input  logic        ahb_we,
  input  logic [10:0] ahb_addr,
  input  logic [31:0] ahb_wdata,
  output logic        ahb_done,
  output logic [31:0] ahb_rdata,
  // APB into OD peripherals (clk_od)
  output logic        psel,
  output logic        penable,
  output logic        pwrite,
  output logic [31:0] paddr,
  output logic [31:0] pwdata,
  input  logic [31:0] prdata,
  input  logic        pready,
  input  logic        pslverr,
  // PNeuro neural compute block (clk_od): layer command and host port
  input  logic        ncb_start,
  input  logic [9:0]  ncb_n_groups,
  input  logic [2:0]  ncb_in_bank,
  input  logic [9:0]  ncb_in_base,
  input  logic [9:0]  ncb_w_base,
  input  logic [2:0]  ncb_out_bank,
  input  logic [9:0]  ncb_out_base,
  input  logic [4:0]  ncb_shift,
  input  logic        ncb_x_signed,
  output logic        ncb_busy,
  output logic        ncb_done,
  input  logic        ncb_h_req,
  input  logic        ncb_h_we,
  input  logic [2:0]  ncb_h_bank,
  input  logic [9:0]  ncb_h_addr,
  input  logic [31:0] ncb_h_wdata,
  output logic [31:0] ncb_h_rdata,
  output logic        ncb_h_rvalid,
  // NVM controller (clk_od): RISC-V instruction fetch and data ports
  input  logic        nvm_flush,
  input  logic        rv_f_req,
  input  logic [16:0] rv_f_addr,
  output logic        rv_f_ready,
  output logic [31:0] rv_f_rdata,
  input  logic        rv_d_req,
  input  logic        rv_d_we,
  input  logic [16:0] rv_d_addr,
  input  logic [31:0] rv_d_wdata,
  output logic        rv_d_done,
  output logic [31:0] rv_d_rdata,
  // SPI to the external FeRAM
  output logic        spi_csn,
  output logic        spi_sck,
  output logic        spi_mosi,
  input  logic        spi_miso
);

  localparam int unsigned AW = TPS_AW;

  // ---------------------------------------------------------------- AR part
  logic [N_IRQ-1:0] pending;
  logic             clr_valid;
  logic [3:0]       clr_id;
  logic             sleep_req, sleep_ack;
  logic             s_req, s_ready;
  logic [15:0]      s_addr;
  logic [31:0]      s_rdata;

  wuc_scheduler u_sched (
    .clk, .rst_n, .pending, .clr_valid, .clr_id,
    .sleep_req, .sleep_ack,
    .s_req, .s_addr, .s_ready, .s_rdata,
    .exec_start, .exec_id, .exec_instr, .exec_done,
    .wuc_idle, .wake_cycles
  );

  logic          reg_req, reg_we;
  region_e       reg_sel;
  logic [3:0]    reg_addr;
  logic [31:0]   reg_wdata, cfg_rdata, gpio_rdata, irq_rdata;
  logic          rp_ck, rp_rdy, rp_q_v;
  logic [AW-1:0] rp_addr;
  logic [31:0]   rp_q;
  logic          wc_ck, wc_we, wc_rdy, wc_q_v;
  logic [AW-1:0] wc_addr;
  logic [31:0]   wc_wdata, wc_q;
  logic          ap_ck, ap_we, ap_rdy, ap_q_v;
  logic [12:0]   ap_addr;
  logic [31:0]   ap_wdata, ap_q;

  wuc_sysbus #(.AW(AW)) u_bus (
    .clk, .rst_n,
    .s_req, .s_addr, .s_ready, .s_rdata,
    .c_req(core_req), .c_we(core_we), .c_addr(core_addr), .c_wdata(core_wdata),
    .c_ready(core_ready), .c_rdata(core_rdata),
    .reg_req, .reg_we, .reg_sel, .reg_addr, .reg_wdata,
    .cfg_rdata, .gpio_rdata, .irq_rdata,
    .rp_ck, .rp_addr, .rp_rdy, .rp_q, .rp_q_v,
    .wc_ck, .wc_we, .wc_addr, .wc_wdata, .wc_rdy, .wc_q, .wc_q_v,
    .ap_ck, .ap_we, .ap_addr, .ap_wdata, .ap_rdy, .ap_q, .ap_q_v
  );

  logic        od_reset_req;
  logic [15:0] dbb_sym_width, dbb_data_delay;
  logic [7:0]  dbb_id;
  logic [31:0] dbb_payload;
  logic        dbb_irq;
  logic [7:0]  gpio_in_s;

  wuc_cfg_regs u_cfg (
    .clk, .rst_n,
    .req(reg_req && reg_sel == RGN_CFG), .we(reg_we), .addr(reg_addr),
    .wdata(reg_wdata), .rdata(cfg_rdata),
    .od_reset_ack, .dbb_payload,
    .pmode, .pwr, .od_reset_req, .riscv_fetch_en, .riscv_boot_addr,
    .fll_cfg, .dbb_sym_width, .dbb_data_delay, .dbb_id, .wur_cfg
  );

  wuc_gpio #(.N(8)) u_gpio (
    .clk, .rst_n,
    .req(reg_req && reg_sel == RGN_GPIO), .we(reg_we), .addr(reg_addr),
    .wdata(reg_wdata), .rdata(gpio_rdata),
    .pad_in(gpio_pad_in), .pad_out(gpio_pad_out), .pad_oe(gpio_pad_oe),
    .gpio_in_s
  );

  // OD interrupt lines are synchronised into the AR clock
  logic [2:0] od_irq_s1, od_irq_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      od_irq_s1 <= '0;
      od_irq_s  <= '0;
    end else begin
      od_irq_s1 <= od_irq;
      od_irq_s  <= od_irq_s1;
    end
  end

  wuc_irq_ctrl u_irq (
    .clk, .rst_n,
    .req(reg_req && reg_sel == RGN_IRQ), .we(reg_we), .addr(reg_addr),
    .wdata(reg_wdata), .rdata(irq_rdata),
    .gpio_in(gpio_in_s), .dbb_irq, .od_irq(od_irq_s),
    .clr_valid, .clr_id, .pending
  );

  dbb u_dbb (
    .clk, .rst_n, .en(pwr.wur_on), .rx(wur_rx),
    .sym_width(dbb_sym_width), .data_delay(dbb_data_delay), .id(dbb_id),
    .irq(dbb_irq), .payload(dbb_payload)
  );

  // ---------------------------------------------------------------- TP-SRAM
  logic          wrp_ck, wrp_we, wrp_rdy, wrp_q_v;
  logic [AW-1:0] wrp_addr;
  logic [31:0]   wrp_wdata, wrp_q;

  tpsram #(.WORDS(TPS_WORDS), .DW(32)) u_tps (
    .clk, .rst_n,
    .sleep_req, .sleep_ack,
    .wrp_ck, .wrp_we, .wrp_addr, .wrp_wdata, .wrp_rdy, .wrp_q, .wrp_q_v,
    .rp_ck, .rp_addr, .rp_rdy, .rp_q, .rp_q_v
  );

  // ---------------------------------------------------------------- OD part
  od_reset_hs u_odrst (
    .clk, .rst_n, .od_reset_req, .od_on(pwr.od_on), .clk_od,
    .od_rst_n, .od_reset_ack
  );

  wrp_arbiter #(.AW(AW), .DW(32)) u_arb (
    .clk_od, .od_rst_n, .sync_mode(od_reset_ack),
    .wuc_ck(wc_ck), .wuc_we(wc_we), .wuc_addr(wc_addr), .wuc_wdata(wc_wdata),
    .wuc_rdy(wc_rdy), .wuc_q(wc_q), .wuc_q_v(wc_q_v),
    .ahb_req, .ahb_we, .ahb_addr, .ahb_wdata, .ahb_done, .ahb_rdata,
    .wrp_ck, .wrp_we, .wrp_addr, .wrp_wdata, .wrp_rdy, .wrp_q, .wrp_q_v,
    .gnt_wuc_o(), .gnt_ahb_o()
  );

  // APB bridge from the WuC into the OD peripherals
  logic        b_req, b_we, b_done;
  logic [12:0] b_addr;
  logic [31:0] b_wdata, b_rdata;

  hs4_sync_conv #(.AW(13), .DW(32)) u_apb_conv (
    .clk(clk_od), .rst_n(od_rst_n),
    .ck(ap_ck), .we(ap_we), .addr(ap_addr), .wdata(ap_wdata),
    .rdy(ap_rdy), .q(ap_q), .q_v(ap_q_v),
    .sreq(b_req), .swe(b_we), .saddr(b_addr), .swdata(b_wdata),
    .sdone(b_done), .srdata(b_rdata)
  );

  apb_master #(.AW(13)) u_apb (
    .clk(clk_od), .rst_n(od_rst_n),
    .sreq(b_req), .swe(b_we), .saddr(b_addr), .swdata(b_wdata),
    .sdone(b_done), .srdata(b_rdata), .err(),
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr
  );

  // ---------------------------------------------------------------- PNeuro
  pnu_ncb u_ncb (
    .clk(clk_od), .rst_n(od_rst_n),
    .start(ncb_start), .n_groups(ncb_n_groups), .in_bank(ncb_in_bank),
    .in_base(ncb_in_base), .w_base(ncb_w_base), .out_bank(ncb_out_bank),
    .out_base(ncb_out_base), .shift(ncb_shift), .x_signed(ncb_x_signed),
    .busy(ncb_busy), .done(ncb_done),
    .h_req(ncb_h_req), .h_we(ncb_h_we), .h_bank(ncb_h_bank), .h_addr(ncb_h_addr),
    .h_wdata(ncb_h_wdata), .h_rdata(ncb_h_rdata), .h_rvalid(ncb_h_rvalid)
  );

  // ---------------------------------------------------------------- NVM
  logic         ic_r_req, ic_r_done;
  logic [13:0]  ic_r_line;
  logic [255:0] ic_r_data;
  logic         ic_hit, ic_miss;

  nvm_icache u_icache (
    .clk(clk_od), .rst_n(od_rst_n), .flush(nvm_flush),
    .f_req(rv_f_req), .f_addr(rv_f_addr), .f_ready(rv_f_ready), .f_rdata(rv_f_rdata),
    .r_req(ic_r_req), .r_line(ic_r_line), .r_done(ic_r_done), .r_data(ic_r_data),
    .hit_o(ic_hit), .miss_o(ic_miss)
  );

  feram_ctrl u_feram (
    .clk(clk_od), .rst_n(od_rst_n),
    .i_req(ic_r_req), .i_line(ic_r_line), .i_done(ic_r_done), .i_data(ic_r_data),
    .d_req(rv_d_req), .d_we(rv_d_we), .d_addr(rv_d_addr), .d_wdata(rv_d_wdata),
    .d_done(rv_d_done), .d_rdata(rv_d_rdata),
    .spi_csn, .spi_sck, .spi_mosi, .spi_miso
  );

endmodule
