// tb_od_reset_hs: self-checking test of the OD reset handshake.
// Checks that the OD reset is asserted immediately on request or when the OD
// supply is off, that its release and the acknowledge are delayed by the
// synchronisers (release after 2 clk_od edges, ack after one more clk_od edge
// and 2 AR edges), that the acknowledge never precedes the release, and that
// with clk_od stopped no acknowledge comes.
module tb_od_reset_hs;
  logic clk = 0, clk_od = 0, rst_n = 0, od_reset_req = 1, od_on = 0;
  logic od_rst_n, od_reset_ack;
  logic od_run = 1;
  always #5 clk = ~clk;
  always #4 if (od_run) clk_od = ~clk_od; else clk_od = 0;

  od_reset_hs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic ack_q = 0;
  always @(negedge clk) begin
    if (rst_n && od_reset_ack && !ack_q && !od_rst_n) begin
      failures++; $display("FAIL: ack rose while OD still in reset");
    end
    ack_q <= od_reset_ack;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_od, n_ar;
  initial begin
    #30 rst_n = 1;
    #50 check(!od_rst_n && !od_reset_ack, "reset held while requested");
    od_on = 1; od_reset_req = 0;
    n_od = 0;
    while (!od_rst_n) begin @(posedge clk_od); n_od++; end
    check(n_od >= 2 && n_od <= 3, $sformatf("release after %0d clk_od edges", n_od));
    n_ar = 0;
    while (!od_reset_ack) begin @(posedge clk); n_ar++; end
    check(n_ar >= 2 && n_ar <= 4, $sformatf("ack after %0d clk edges", n_ar));
    // reset request: immediate assertion
    #13 od_reset_req = 1;
    #1 check(!od_rst_n, "asynchronous assertion on request");
    repeat (4) @(posedge clk);
    check(!od_reset_ack, "ack falls after request");
    od_reset_req = 0;
    wait (od_reset_ack);
    // power off
    #7 od_on = 0;
    #1 check(!od_rst_n, "reset when OD is off");
    repeat (4) @(posedge clk);
    check(!od_reset_ack, "no ack when OD is off");
    // clock stopped: no ack
    od_run = 0; od_on = 1;
    repeat (20) @(posedge clk);
    check(!od_reset_ack && !od_rst_n, "no ack without clk_od");
    od_run = 1;
    wait (od_reset_ack);
    check(od_rst_n, "ack after clock restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
