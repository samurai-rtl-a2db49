// tb_wuc_sysbus: self-checking test of the WuC system bus.
// Behind the bus: a TP-SRAM (reads on RP, writes on WRP), register models for
// CFG / GPIO / IT, and a four-phase-to-synchronous converter with a
// synchronous array standing for the APB side. Checks: TP-SRAM write then
// read, register strobes with the right region / offset / data and register
// read data, APB-region writes and reads, and that the scheduler port wins
// a simultaneous request.
module tb_wuc_sysbus;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_req, s_ready, c_req, c_we, c_ready;
  logic [15:0] s_addr, c_addr;
  logic [31:0] s_rdata, c_wdata, c_rdata;
  logic reg_req, reg_we;
  region_e reg_sel;
  logic [3:0] reg_addr;
  logic [31:0] reg_wdata, cfg_rdata, gpio_rdata, irq_rdata;
  logic rp_ck, rp_rdy, rp_q_v, wc_ck, wc_we, wc_rdy, wc_q_v, ap_ck, ap_we, ap_rdy, ap_q_v;
  logic [10:0] rp_addr, wc_addr;
  logic [12:0] ap_addr;
  logic [31:0] rp_q, wc_wdata, wc_q, ap_wdata, ap_q;
  logic sleep_ack;

  wuc_sysbus #(.AW(11)) dut (.*);

  tpsram #(.WORDS(2048)) u_mem (
    .clk, .rst_n, .sleep_req(1'b0), .sleep_ack,
    .wrp_ck(wc_ck), .wrp_we(wc_we), .wrp_addr(wc_addr), .wrp_wdata(wc_wdata),
    .wrp_rdy(wc_rdy), .wrp_q(wc_q), .wrp_q_v(wc_q_v),
    .rp_ck, .rp_addr, .rp_rdy, .rp_q, .rp_q_v);

  logic b_req, b_we;
  logic b_done = 0;
  logic [12:0] b_addr;
  logic [31:0] b_wdata, b_rdata;
  logic [31:0] apb_mem [8192];
  hs4_sync_conv #(.AW(13)) u_conv (
    .clk, .rst_n, .ck(ap_ck), .we(ap_we), .addr(ap_addr), .wdata(ap_wdata),
    .rdy(ap_rdy), .q(ap_q), .q_v(ap_q_v),
    .sreq(b_req), .swe(b_we), .saddr(b_addr), .swdata(b_wdata),
    .sdone(b_done), .srdata(b_rdata));
  always @(posedge clk) begin
    b_done <= b_req && !b_done;
    if (b_req && !b_done) begin
      if (b_we) apb_mem[b_addr] <= b_wdata;
      b_rdata <= apb_mem[b_addr];
    end
  end

  // register models
  int checks = 0, failures = 0, nreg = 0;
  region_e last_sel; logic [3:0] last_addr; logic [31:0] last_wdata; logic last_we;
  assign cfg_rdata  = 32'hC0F0_0000 | 32'(reg_addr);
  assign gpio_rdata = 32'h6910_0000 | 32'(reg_addr);
  assign irq_rdata  = 32'h1A00_0000 | 32'(reg_addr);
  always @(posedge clk) if (reg_req) begin
    nreg++; last_sel <= reg_sel; last_addr <= reg_addr; last_wdata <= reg_wdata; last_we <= reg_we;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cop(input bit w, input logic [15:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); c_req = 1; c_we = w; c_addr = a; c_wdata = d;
    @(posedge clk iff c_ready); #1 r = c_rdata;
    @(negedge clk); c_req = 0;
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] r, tps1, tps2, refm [64];
  initial begin
    s_req = 0; s_addr = 0; c_req = 0; c_we = 0; c_addr = 0; c_wdata = 0;
    #20 rst_n = 1;
    wait (sleep_ack);
    for (int i = 0; i < 32; i++) begin
      refm[i] = $urandom;
      cop(1, 16'(i * 33), refm[i], r);
    end
    for (int i = 0; i < 32; i++) begin
      cop(0, 16'(i * 33), '0, r);
      check(r == refm[i], $sformatf("TP-SRAM word %0d %h %h", i * 33, r, refm[i]));
    end
    tps1 = refm[1]; tps2 = refm[2];
    // registers
    cop(1, 16'h2005, 32'h1234_5678, r);
    check(last_sel == RGN_CFG && last_addr == 5 && last_wdata == 32'h1234_5678 && last_we, "CFG write strobe");
    cop(0, 16'h4002, '0, r);
    check(r == 32'h6910_0002 && last_sel == RGN_GPIO && !last_we, "GPIO read");
    cop(0, 16'h6003, '0, r);
    check(r == 32'h1A00_0003 && last_sel == RGN_IRQ, "IT read");
    cop(0, 16'h2009, '0, r);
    check(r == 32'hC0F0_0009, "CFG read");
    check(nreg == 4, $sformatf("register strobes %0d", nreg));
    // APB region
    for (int i = 0; i < 16; i++) begin
      refm[i] = $urandom;
      cop(1, 16'h8000 | 16'(i * 100), refm[i], r);
    end
    for (int i = 0; i < 16; i++) begin
      cop(0, 16'h8000 | 16'(i * 100), '0, r);
      check(r == refm[i] && apb_mem[i * 100] == refm[i], $sformatf("APB word %0d", i * 100));
    end
    // priority: both request in the same cycle, the scheduler is served first
    @(negedge clk);
    s_req = 1; s_addr = 16'(33); c_req = 1; c_we = 0; c_addr = 16'(66);
    @(posedge clk iff (s_ready || c_ready));
    check(s_ready && !c_ready && s_rdata == tps1, "scheduler first");
    @(negedge clk); s_req = 0;
    @(posedge clk iff c_ready);
    #1 check(c_rdata == tps2, "core served after");
    @(negedge clk); c_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
