// tb_samurai_top: end-to-end test of the SamurAI node at its default sizes.
// The testbench plays the parts that are not in the RTL: the WuC execution
// core (it runs each routine through the system-bus port), the RISC-V side
// on the AHB port of the TP-SRAM, an APB peripheral, the wake-up radio bit
// stream and a PIR sensor on GPIO 0. Scenario:
//   1 boot: a software interrupt wakes the WuC, whose routine writes the
//     routine entry words into the TP-SRAM (memory woken from sleep);
//   2 PIR event on GPIO 0 -> wake-up from IDLE, TP-SRAM woken, first fetch
//     checked; wake-up time reported;
//   3 radio message -> DBB interrupt, routine reads the payload;
//   4 the routine switches to the CPU-running power mode: OD reset handshake,
//     WRP arbitration switched to round robin on clk_od; the "RISC-V" writes
//     a result into the TP-SRAM over AHB while the WuC also writes; the
//     WuC reads the result; the WuC accesses an OD peripheral over APB;
//     the "RISC-V" loads a small fully-connected layer into the PNeuro
//     compute block, runs it and checks the 8 outputs; it also executes
//     code in place from the FeRAM through the instruction cache (misses
//     refill whole lines over SPI, loops hit) and writes and reads a data
//     word in the FeRAM;
//   5 OD interrupt -> routine; two events at once -> chained routines;
//   6 back to IDLE power mode and TP-SRAM sleep.
// Each mechanism is counted and must have happened at least once.
module tb_samurai_top;
  import samurai_pkg::*;
  logic clk = 0, clk_od = 0, rst_n = 0;
  always #5 clk = ~clk;         // AR sequencing
  always #2 clk_od = ~clk_od;   // OD clock

  logic [7:0] gpio_pad_in, gpio_pad_out, gpio_pad_oe;
  logic wur_rx;
  logic [15:0] wur_cfg, fll_cfg, wake_cycles;
  power_mode_e pmode;
  pwr_ctrl_t pwr;
  logic core_req, core_we, core_ready, exec_start, exec_done, wuc_idle;
  logic [15:0] core_addr;
  logic [31:0] core_wdata, core_rdata, exec_instr, riscv_boot_addr;
  logic [3:0] exec_id;
  logic [2:0] od_irq;
  logic od_rst_n, od_reset_ack, riscv_fetch_en;
  logic ahb_req, ahb_we, ahb_done;
  logic [10:0] ahb_addr;
  logic [31:0] ahb_wdata, ahb_rdata;
  logic psel, penable, pwrite, pready, pslverr;
  logic [31:0] paddr, pwdata, prdata;

  logic ncb_start = 0, ncb_x_signed = 0, ncb_busy, ncb_done;
  logic [9:0] ncb_n_groups = 0, ncb_in_base = 0, ncb_w_base = 0, ncb_out_base = 0, ncb_h_addr = 0;
  logic [2:0] ncb_in_bank = 0, ncb_out_bank = 0, ncb_h_bank = 0;
  logic [4:0] ncb_shift = 0;
  logic ncb_h_req = 0, ncb_h_we = 0, ncb_h_rvalid;
  logic [31:0] ncb_h_wdata = 0, ncb_h_rdata;

  logic nvm_flush = 0, rv_f_req = 0, rv_f_ready, rv_d_req = 0, rv_d_we = 0, rv_d_done;
  logic [16:0] rv_f_addr = 0, rv_d_addr = 0;
  logic [31:0] rv_f_rdata, rv_d_wdata = 0, rv_d_rdata;
  logic spi_csn, spi_sck, spi_mosi, spi_miso;

  samurai_top dut (.*);
  feram_model u_feram (.csn(spi_csn), .sck(spi_sck), .mosi(spi_mosi), .miso(spi_miso));

  function automatic logic [31:0] nvm_word(input int unsigned wa);
    return {u_feram.init_byte(4*wa), u_feram.init_byte(4*wa+1), u_feram.init_byte(4*wa+2), u_feram.init_byte(4*wa+3)};
  endfunction
  int m_ic_hit = 0, m_ic_miss = 0, m_nvm_data = 0;
  always @(posedge clk_od) begin
    if (dut.ic_hit)  m_ic_hit++;
    if (dut.ic_miss && !dut.ic_r_req) m_ic_miss++;
  end

  int checks = 0, failures = 0;
  int m_wakeup = 0, m_tps_wake = 0, m_tps_sleep = 0, m_dbb = 0, m_mode_switch = 0,
      m_sync_mode = 0, m_ahb = 0, m_rr_wuc = 0, m_apb = 0, m_od_irq = 0, m_chain = 0, m_ncb = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- WuC execution core model: bus accesses
  task automatic bus(input bit w, input logic [15:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); core_req = 1; core_we = w; core_addr = a; core_wdata = d;
    @(posedge clk iff core_ready);
    r = core_rdata;
    @(negedge clk); core_req = 0;
  endtask
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    logic [31:0] r; bus(1, a, d, r);
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] r);
    bus(0, a, '0, r);
  endtask
  task automatic routine_end();
    @(negedge clk); exec_done = 1;
    @(negedge clk); exec_done = 0;
  endtask

  // ---- APB peripheral: one register file, one wait state
  logic [31:0] apb_regs [16];
  logic apb_wait = 0;
  always @(posedge clk_od) begin
    apb_wait <= psel && penable && !apb_wait;
    if (psel && penable && apb_wait) begin
      m_apb++;
      if (pwrite) apb_regs[paddr[5:2]] <= pwdata;
    end
  end
  assign pready  = psel && penable && apb_wait;
  assign prdata  = apb_regs[paddr[5:2]];
  assign pslverr = 1'b0;

  // ---- AHB side (RISC-V) of the TP-SRAM
  task automatic ahb(input bit w, input int a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk_od); ahb_req = 1; ahb_we = w; ahb_addr = 11'(a); ahb_wdata = d;
    @(posedge clk_od iff ahb_done);
    r = ahb_rdata;
    @(negedge clk_od); ahb_req = 0;
    m_ahb++;
  endtask

  // ---- observation
  logic sleep_ack_q = 0, ack_q = 0;
  always @(posedge clk) begin
    if (dut.sleep_ack && !sleep_ack_q) m_tps_wake++;
    if (!dut.sleep_ack && sleep_ack_q) m_tps_sleep++;
    sleep_ack_q <= dut.sleep_ack;
    if (od_reset_ack && !ack_q) m_sync_mode++;
    ack_q <= od_reset_ack;
    if (dut.u_dbb.irq) m_dbb++;
  end
  always @(posedge clk_od) if (dut.u_arb.gnt_wuc_o) m_rr_wuc++;

  // ---- radio frame
  task automatic send_sym(input bit b, input int w);
    for (int c = 0; c < w; c++) begin @(negedge clk); wur_rx = b && (c < w / 2 + 2); end
  endtask
  task automatic send_frame(input logic [7:0] fid, input logic [31:0] pl, input int w);
    for (int i = 0; i < 8; i++) send_sym(!(i % 2), w);
    for (int i = 7; i >= 0; i--) send_sym(fid[i], w);
    for (int i = 31; i >= 0; i--) send_sym(pl[i], w);
    @(negedge clk); wur_rx = 0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] r;
  int t0;
  initial begin
    gpio_pad_in = 0; wur_rx = 0; core_req = 0; core_we = 0; core_addr = 0; core_wdata = 0;
    exec_done = 0; od_irq = 0; ahb_req = 0; ahb_we = 0; ahb_addr = 0; ahb_wdata = 0;
    #40 rst_n = 1;
    repeat (10) @(posedge clk);
    check(wuc_idle && !dut.sleep_ack && pmode == PM_IDLE, "IDLE after reset, TP-SRAM asleep");
    // interrupt configuration: GPIO0, DBB, OD0, OD1, SW0 enabled, rising edges
    wr(16'h6001, 32'h0);
    wr(16'h6000, 32'h1701);
    // 1 boot through a software interrupt
    wr(16'h6003, 32'h1);
    @(posedge clk iff exec_start);
    check(exec_id == 12, "software interrupt routine");
    for (int i = 0; i < 16; i++) wr(16'(i * 16), 32'hE000_0000 | 32'(i));
    routine_end();
    wait (wuc_idle);
    repeat (5) @(posedge clk);
    check(!dut.sleep_ack, "TP-SRAM asleep after the boot routine");
    // 2 PIR event on GPIO 0
    @(negedge clk); gpio_pad_in[0] = 1;
    @(posedge clk iff exec_start);
    m_wakeup++;
    check(exec_id == 0 && exec_instr == 32'hE000_0000, "GPIO routine and first fetch");
    check(wake_cycles > 0 && wake_cycles < 40, $sformatf("wake-up took %0d cycles", wake_cycles));
    $display("mechanisms: wake-up from IDLE took %0d cycles", wake_cycles);
    // switch the WuR on and program the DBB
    wr(16'h2000 | 16'(CFG_DBB_SYM), 32'd12);
    wr(16'h2000 | 16'(CFG_DBB_DLY), 32'd4);
    wr(16'h2000 | 16'(CFG_DBB_ID),  32'h96);
    wr(16'h2000 | 16'(CFG_PMODE),   32'(PM_WUC_WUR));
    check(pwr.wur_on && !pwr.od_on, "WuC+WuR mode");
    routine_end();
    gpio_pad_in[0] = 0;
    wait (wuc_idle);
    // 3 radio message
    send_frame(8'h96, 32'h0BAD_CAFE, 12);
    @(posedge clk iff exec_start);
    check(exec_id == 8, "DBB routine");
    rd(16'h2000 | 16'(CFG_DBB_PAY), r);
    check(r == 32'h0BAD_CAFE, $sformatf("radio payload %h", r));
    // 4 power up the OD part and start the CPU
    wr(16'h2000 | 16'(CFG_BOOT), 32'h1C00_8000);
    wr(16'h2000 | 16'(CFG_ODCTRL), 32'b1101);
    wr(16'h2000 | 16'(CFG_PMODE), 32'(PM_CPU_RUN));
    m_mode_switch++;
    t0 = 0;
    do begin rd(16'h2000 | 16'(CFG_STATUS), r); t0++; end while (!r[0] && t0 < 100);
    check(r[0] && od_reset_ack && od_rst_n, "OD reset handshake complete");
    check(riscv_fetch_en && riscv_boot_addr == 32'h1C00_8000 && pwr.tps_linked, "CPU started");
    // concurrent: RISC-V writes results over AHB, WuC writes words too
    fork
      for (int i = 0; i < 8; i++) ahb(1, 1024 + i, 32'hA0B0_0000 + i, r);
      for (int i = 0; i < 8; i++) wr(16'(1100 + i), 32'hC0D0_0000 + i);
    join
    for (int i = 0; i < 8; i++) begin
      rd(16'(1024 + i), r);
      check(r == 32'hA0B0_0000 + i, "result from the RISC-V read by the WuC");
    end
    for (int i = 0; i < 8; i++) begin
      ahb(0, 1100 + i, '0, r);
      check(r == 32'hC0D0_0000 + i, "WuC data read by the RISC-V");
    end
    // APB access to an OD peripheral
    wr(16'h8003, 32'h5555_AAAA);
    rd(16'h8003, r);
    check(r == 32'h5555_AAAA && apb_regs[3] == 32'h5555_AAAA, "APB peripheral register");
    // PNeuro FC layer: 2 groups of 4 inputs, 8 outputs
    begin
      logic [31:0] xw [2], ww [8][2];
      int sum;
      for (int j = 0; j < 2; j++) begin
        xw[j] = $urandom;
        for (int p = 0; p < 8; p++) begin
          ww[p][j] = $urandom;
          @(negedge clk_od); ncb_h_req = 1; ncb_h_we = 1; ncb_h_bank = 3'(p); ncb_h_addr = 10'(j); ncb_h_wdata = ww[p][j];
        end
      end
      for (int j = 0; j < 2; j++) begin
        @(negedge clk_od); ncb_h_req = 1; ncb_h_we = 1; ncb_h_bank = 3'd7; ncb_h_addr = 10'(100 + j); ncb_h_wdata = xw[j];
      end
      @(negedge clk_od); ncb_h_req = 0; ncb_h_we = 0;
      ncb_n_groups = 2; ncb_in_bank = 7; ncb_in_base = 100; ncb_w_base = 0;
      ncb_out_bank = 3; ncb_out_base = 200; ncb_shift = 6; ncb_x_signed = 0;
      @(negedge clk_od); ncb_start = 1;
      @(negedge clk_od); ncb_start = 0;
      @(posedge clk_od iff ncb_done);
      m_ncb++;
      for (int h = 0; h < 2; h++) begin
        @(negedge clk_od); ncb_h_req = 1; ncb_h_bank = 3; ncb_h_addr = 10'(200 + h);
        @(negedge clk_od); ncb_h_req = 0;
        for (int p = 4 * h; p < 4 * h + 4; p++) begin
          sum = 0;
          for (int j = 0; j < 2; j++)
            for (int k = 0; k < 4; k++)
              sum += int'(xw[j][8*k +: 8]) * int'($signed(ww[p][j][8*k +: 8]));
          sum = sum >>> 6;
          sum = (sum < 0) ? 0 : (sum > 255) ? 255 : sum;
          check(ncb_h_rvalid && ncb_h_rdata[8*(p-4*h) +: 8] == 8'(sum), $sformatf("PNeuro output %0d", p));
        end
      end
    end
    // in-place execution from the FeRAM: a 12-word loop run 3 times
    for (int it = 0; it < 3; it++)
      for (int a = 'h400; a < 'h40C; a++) begin
        @(negedge clk_od); rv_f_req = 1; rv_f_addr = 17'(a);
        @(posedge clk_od iff rv_f_ready);
        check(rv_f_rdata == nvm_word(a), $sformatf("instruction at %h", a));
        @(negedge clk_od); rv_f_req = 0;
      end
    // data word written to and read back from the FeRAM
    for (int k = 0; k < 2; k++) begin
      @(negedge clk_od); rv_d_req = 1; rv_d_we = (k == 0); rv_d_addr = 17'h1234; rv_d_wdata = 32'h600D_F00D;
      @(posedge clk_od iff rv_d_done);
      if (k == 1) check(rv_d_rdata == 32'h600D_F00D, "FeRAM data word");
      @(negedge clk_od); rv_d_req = 0;
      m_nvm_data++;
    end
    routine_end();
    wait (wuc_idle);
    // 5 OD interrupt, then two events at once (chained)
    @(negedge clk_od); od_irq = 3'b001;
    @(posedge clk iff exec_start);
    m_od_irq++;
    check(exec_id == 9, "OD interrupt routine");
    routine_end();
    wait (wuc_idle);
    @(negedge clk_od); od_irq = 3'b000;
    repeat (4) @(posedge clk);
    @(negedge clk); od_irq = 3'b010; gpio_pad_in[0] = 1;
    @(posedge clk iff exec_start);
    check(exec_id == 0, "GPIO first");
    routine_end();
    @(posedge clk iff exec_start);
    check(exec_id == 10 && !wuc_idle, "OD1 chained without sleeping");
    m_chain++;
    // 6 back to IDLE
    wr(16'h2000 | 16'(CFG_PMODE), 32'(PM_IDLE));
    routine_end();
    wait (wuc_idle);
    repeat (10) @(posedge clk);
    check(!od_reset_ack && !pwr.od_on && !dut.sleep_ack, "OD off and TP-SRAM asleep in IDLE");
    // mechanism counts
    check(m_wakeup > 0, "wake-up from IDLE");
    check(m_tps_wake >= 3 && m_tps_sleep >= 3, $sformatf("TP-SRAM wake %0d sleep %0d", m_tps_wake, m_tps_sleep));
    check(m_dbb > 0, "DBB message");
    check(m_mode_switch > 0 && m_sync_mode > 0, "WRP policy switch");
    check(m_ahb >= 16, "AHB accesses");
    check(m_rr_wuc >= 8, $sformatf("WuC writes through the arbiter %0d", m_rr_wuc));
    check(m_apb >= 2, "APB transfers");
    check(m_od_irq > 0, "OD interrupt");
    check(m_chain > 0, "chained routines");
    check(m_ncb > 0, "PNeuro layer");
    check(m_ic_miss == 2 && m_ic_hit >= 34, $sformatf("cache misses %0d hits %0d", m_ic_miss, m_ic_hit));
    check(m_nvm_data == 2, "FeRAM data accesses");
    $display("mechanisms: wakeup=%0d tps_wake=%0d tps_sleep=%0d dbb=%0d mode_switch=%0d sync=%0d ahb=%0d rr_wuc=%0d apb=%0d od_irq=%0d chain=%0d ncb=%0d ic_hit=%0d ic_miss=%0d nvm_data=%0d",
             m_wakeup, m_tps_wake, m_tps_sleep, m_dbb, m_mode_switch, m_sync_mode, m_ahb, m_rr_wuc, m_apb, m_od_irq, m_chain, m_ncb, m_ic_hit, m_ic_miss, m_nvm_data);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
