// samurai_pkg: sizes, encodings and types shared by the SamurAI node RTL.
//
// The TP-SRAM holds 8 kB as 32-bit words (2048 words, 11-bit word address).
// The Wake-up Controller (WuC) sees 16 interrupt sources: GPIO 0..7, then the
// digital baseband (DBB), three On-Demand (OD) sources and four software
// sources. The five power modes are those of the node's power table; their
// 3-bit encoding, the register map and the trigger-mode encoding are choices
// of this implementation.
package samurai_pkg;

  localparam int unsigned TPS_BYTES = 8192;
  localparam int unsigned TPS_WORDS = TPS_BYTES / 4;
  localparam int unsigned TPS_AW    = $clog2(TPS_WORDS);
  localparam int unsigned DW        = 32;

  // Interrupt source numbering
  localparam int unsigned N_IRQ     = 16;
  localparam int unsigned IRQ_GPIO0 = 0;
  localparam int unsigned IRQ_DBB   = 8;
  localparam int unsigned IRQ_OD0   = 9;
  localparam int unsigned IRQ_SW0   = 12;

  typedef enum logic [2:0] {
    PM_IDLE       = 3'd0,
    PM_WUC_ONLY   = 3'd1,
    PM_WUC_WUR    = 3'd2,
    PM_WUC_PERIPH = 3'd3,
    PM_CPU_RUN    = 3'd4
  } power_mode_e;

  // Triggering condition of one interrupt source
  typedef enum logic [1:0] {
    TRIG_RISE = 2'd0,
    TRIG_FALL = 2'd1,
    TRIG_HIGH = 2'd2,
    TRIG_LOW  = 2'd3
  } trig_e;

  // External power switch and clock controls derived from the power mode
  typedef struct packed {
    logic wur_on;       // wake-up radio and DBB supplied
    logic od_on;        // OD power domain switched on
    logic tps_linked;   // TP-SRAM supply tied to the OD supply (CPU running)
    logic cpu_clk_en;   // RISC-V clock running (gated in WuC+Periph mode)
    logic periph_clk_en;// OD peripheral clock running
  } pwr_ctrl_t;

  // WuC system-bus regions, selected by word-address bits [15:13]
  typedef enum logic [2:0] {
    RGN_TPS  = 3'd0,
    RGN_CFG  = 3'd1,
    RGN_GPIO = 3'd2,
    RGN_IRQ  = 3'd3,
    RGN_APB  = 3'd4
  } region_e;

  // Configuration register word offsets
  localparam logic [3:0] CFG_PMODE    = 4'd0;
  localparam logic [3:0] CFG_ODCTRL   = 4'd1;  // [0] clk_en [1] reset_req [2] fetch_en [3] wur_en in periph/cpu modes
  localparam logic [3:0] CFG_BOOT     = 4'd2;
  localparam logic [3:0] CFG_FLL      = 4'd3;
  localparam logic [3:0] CFG_DBB_SYM  = 4'd4;
  localparam logic [3:0] CFG_DBB_DLY  = 4'd5;
  localparam logic [3:0] CFG_DBB_ID   = 4'd6;
  localparam logic [3:0] CFG_WUR      = 4'd7;
  localparam logic [3:0] CFG_STATUS   = 4'd8;  // [0] od_reset_ack
  localparam logic [3:0] CFG_DBB_PAY  = 4'd9;

  // Processing-element operations of the ML accelerator
  typedef enum logic [3:0] {
    PE_NOP    = 4'd0,
    PE_CLR    = 4'd1,  // acc <= 0
    PE_MAC    = 4'd2,  // acc <= acc + x*w
    PE_MUL_RF = 4'd3,  // rf[idx] <= x*w (multiplication only)
    PE_ACC_RF = 4'd4,  // acc <= acc + rf[idx]
    PE_ADD8   = 4'd5,  // r8 <= sat(x + w)
    PE_MAX8   = 4'd6,  // r8 <= max(x, w)
    PE_ACT    = 4'd7,  // out <= sat8(relu(acc >>> shift))
    PE_NB32   = 4'd8,  // acc <= left neighbour acc
    PE_NB8    = 4'd9   // r8 <= left neighbour r8
  } pe_op_e;

endpackage
