// tb_wrp_arbiter: self-checking test of the TP-SRAM write-port sharing.
// A TP-SRAM (on its own clock) sits behind the arbiter (on clk_od).
// Direct mode: the WuC four-phase writes reach the memory with no grant
// given on clk_od. Synchronous mode: the WuC and the AHB side write and read
// at the same time; every word is checked, both requesters must be granted,
// and while both keep requesting the grants must alternate (round robin):
// a waiting AHB request never sees two WuC grants in a row.
module tb_wrp_arbiter;
  localparam int AW = 8;
  logic clk = 0, clk_od = 0, rst_n = 0, od_rst_n = 0, sync_mode = 0;
  always #5 clk = ~clk;
  always #3 clk_od = ~clk_od;

  logic wuc_ck, wuc_we, wuc_rdy, wuc_q_v;
  logic [AW-1:0] wuc_addr, ahb_addr, wrp_addr, rp_addr;
  logic [31:0] wuc_wdata, wuc_q, ahb_wdata, ahb_rdata, wrp_wdata, wrp_q, rp_q;
  logic ahb_req, ahb_we, ahb_done;
  logic wrp_ck, wrp_we, wrp_rdy, wrp_q_v, rp_ck, rp_rdy, rp_q_v;
  logic sleep_req, sleep_ack, gnt_wuc_o, gnt_ahb_o;

  tpsram #(.WORDS(256)) u_mem (
    .clk, .rst_n, .sleep_req, .sleep_ack,
    .wrp_ck, .wrp_we, .wrp_addr, .wrp_wdata, .wrp_rdy, .wrp_q, .wrp_q_v,
    .rp_ck, .rp_addr, .rp_rdy, .rp_q, .rp_q_v);

  wrp_arbiter #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0, g_wuc = 0, g_ahb = 0, alternations = 0, ties = 0;
  logic last_was_wuc;
  logic [31:0] refm [256];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wuc_op(input bit w, input int a, input logic [31:0] d, output logic [31:0] r);
    wait (wuc_rdy);
    #2 wuc_we = w; wuc_addr = AW'(a); wuc_wdata = d;
    #2 wuc_ck = 1;
    wait (!wuc_rdy);
    #4 wuc_ck = 0;
    if (w) wait (wuc_rdy); else wait (wuc_rdy && wuc_q_v);
    r = wuc_q;
  endtask

  // hold = 1 keeps the request up for a back-to-back next access
  task automatic ahb_op(input bit w, input int a, input logic [31:0] d, output logic [31:0] r,
                        input bit hold = 0);
    if (!ahb_req) @(negedge clk_od);
    ahb_req = 1; ahb_we = w; ahb_addr = AW'(a); ahb_wdata = d;
    @(posedge clk_od iff ahb_done);
    #1 r = ahb_rdata;
    @(negedge clk_od); ahb_req = hold;
  endtask

  always @(posedge clk_od) begin
    if (gnt_wuc_o || gnt_ahb_o) begin
      if (gnt_wuc_o) g_wuc++; else g_ahb++;
      if (g_wuc + g_ahb > 1 && last_was_wuc != gnt_wuc_o) alternations++;
      last_was_wuc <= gnt_wuc_o;
    end
  end

  // fairness: when both sides ask at the same arbitration, the side that
  // did not have the previous grant wins (observed on the arbiter's state)
  bit expect_ahb, tie_q = 0;
  always @(posedge clk_od) begin
    if (tie_q) begin
      check(int'(dut.gnt) == (expect_ahb ? 2 : 1), "round-robin winner on a tie");
      ties++;
    end
    tie_q      <= (int'(dut.gnt) == 0) && dut.m_idle && dut.c_req && ahb_req;
    expect_ahb <= last_was_wuc;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] r;
  initial begin
    wuc_ck = 0; wuc_we = 0; wuc_addr = 0; wuc_wdata = 0;
    ahb_req = 0; ahb_we = 0; ahb_addr = 0; ahb_wdata = 0;
    rp_ck = 0; rp_addr = 0; sleep_req = 0; last_was_wuc = 0;
    #40 rst_n = 1;
    wait (sleep_ack);
    // ---- direct mode
    for (int i = 0; i < 16; i++) begin
      refm[i] = $urandom;
      wuc_op(1, i, refm[i], r);
    end
    for (int i = 0; i < 16; i++) begin
      wuc_op(0, i, '0, r);
      check(r == refm[i], $sformatf("direct read %0d", i));
    end
    check(g_wuc == 0 && g_ahb == 0, "no clk_od grant in direct mode");
    // ---- synchronous mode
    #20 od_rst_n = 1; sync_mode = 1;
    #50;
    fork
      for (int i = 32; i < 64; i++) begin
        logic [31:0] rr;
        refm[i] = $urandom;
        wuc_op(1, i, refm[i], rr);
      end
      for (int i = 64; i < 96; i++) begin
        logic [31:0] rr;
        refm[i] = $urandom;
        ahb_op(1, i, refm[i], rr, i < 95);
      end
    join
    for (int i = 32; i < 96; i++) begin
      ahb_op(0, i, '0, r);
      check(r == refm[i], $sformatf("AHB read %0d: %h vs %h", i, r, refm[i]));
    end
    for (int i = 60; i < 70; i++) begin
      wuc_op(0, i, '0, r);
      check(r == refm[i], $sformatf("WuC read (sync mode) %0d", i));
    end
    check(g_wuc >= 42 && g_ahb >= 96, $sformatf("grants wuc=%0d ahb=%0d", g_wuc, g_ahb));
    check(alternations >= 20, $sformatf("round-robin alternations %0d", alternations));
    check(ties > 0, $sformatf("simultaneous requests seen %0d", ties));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
