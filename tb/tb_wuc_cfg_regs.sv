// tb_wuc_cfg_regs: self-checking test of the WuC configuration registers.
// Writes and reads back every register, and checks the supply and clock
// controls of each of the five power modes against the power-mode table
// (written out here as an independent reference), the OD reset request, and
// that the RISC-V fetch enable needs the CPU clock and the OD reset
// acknowledge.
module tb_wuc_cfg_regs;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, we, od_reset_ack, od_reset_req, riscv_fetch_en;
  logic [3:0] addr;
  logic [31:0] wdata, rdata, dbb_payload, riscv_boot_addr;
  power_mode_e pmode;
  pwr_ctrl_t pwr;
  logic [15:0] fll_cfg, dbb_sym_width, dbb_data_delay, wur_cfg;
  logic [7:0] dbb_id;

  wuc_cfg_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask
  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; #1 d = rdata;
  endtask

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected {wur_on, od_on, tps_linked, cpu_clk_en, periph_clk_en} with
  // ODCTRL = clk_en | wur_en
  function automatic logic [4:0] expect_pwr(input int m);
    case (m)
      0: return 5'b00000;
      1: return 5'b00000;
      2: return 5'b10000;
      3: return 5'b11001;
      4: return 5'b11111;
      default: return 5'b00000;
    endcase
  endfunction

  logic [31:0] d;
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; od_reset_ack = 0; dbb_payload = 32'hCAFEF00D;
    #20 rst_n = 1;
    check(od_reset_req, "OD reset requested after reset");
    wr(CFG_BOOT, 32'h1C00_0080);   rd(CFG_BOOT, d);   check(d == 32'h1C00_0080 && riscv_boot_addr == d, "boot address");
    wr(CFG_FLL, 32'h0000_1234);    rd(CFG_FLL, d);    check(d == 32'h1234 && fll_cfg == 16'h1234, "FLL");
    wr(CFG_DBB_SYM, 32'd20);       rd(CFG_DBB_SYM, d); check(d == 20 && dbb_sym_width == 20, "DBB symbol width");
    wr(CFG_DBB_DLY, 32'd9);        rd(CFG_DBB_DLY, d); check(d == 9 && dbb_data_delay == 9, "DBB delay");
    wr(CFG_DBB_ID, 32'h5A);        rd(CFG_DBB_ID, d);  check(d == 32'h5A && dbb_id == 8'h5A, "DBB id");
    wr(CFG_WUR, 32'h00BE);         rd(CFG_WUR, d);     check(d == 32'hBE && wur_cfg == 16'hBE, "WuR cfg");
    rd(CFG_DBB_PAY, d);            check(d == 32'hCAFEF00D, "DBB payload readable");
    wr(CFG_ODCTRL, 32'b1101);      // clock on, reset released, fetch on, WuR in OD modes
    for (int m = 0; m < 5; m++) begin
      wr(CFG_PMODE, m);
      rd(CFG_PMODE, d);
      check(d == m && pmode == power_mode_e'(m), $sformatf("mode %0d readback", m));
      check(pwr == expect_pwr(m), $sformatf("mode %0d controls %b", m, pwr));
      check(od_reset_req == (m < 3), $sformatf("mode %0d OD reset", m));
      od_reset_ack = 0; #1;
      check(!riscv_fetch_en, "no fetch before OD reset ack");
      od_reset_ack = 1; #1;
      check(riscv_fetch_en == (m == 4), $sformatf("mode %0d fetch enable", m));
      rd(CFG_STATUS, d); check(d[0] == 1'b1, "status shows ack");
    end
    wr(CFG_ODCTRL, 32'b0111);
    check(!pwr.wur_on && pwr.od_on, "WuR off in CPU mode when not enabled");
    check(od_reset_req, "reset request bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
