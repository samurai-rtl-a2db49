// tb_hs4_sync_conv: self-checking test of the four-phase to synchronous
// converter. The testbench plays the asynchronous requester on the
// four-phase side (own clock, unrelated to the converter clock) and a
// synchronous target with a random response time on the other side,
// checking captured address / data / strobe, read data returned on Q with
// Q_V, Q_V low during a read, and one synchronous request per transfer.
module tb_hs4_sync_conv;
  logic clk = 0, rst_n = 0;
  always #7 clk = ~clk;          // converter (OD) clock

  logic ck, we, rdy, q_v, sreq, swe, sdone;
  logic [9:0] addr, saddr;
  logic [31:0] wdata, q, swdata, srdata;

  hs4_sync_conv #(.AW(10), .DW(32)) dut (.*);

  int checks = 0, failures = 0, nreq = 0;
  logic [31:0] mem [1024];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // synchronous target
  initial begin
    sdone = 0; srdata = '0;
    forever begin
      @(posedge clk);
      sdone <= 0;
      if (sreq && !sdone) begin
        nreq++;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        if (swe) mem[saddr] = swdata;
        else srdata <= mem[saddr];
        sdone <= 1;
        @(posedge clk);
        sdone <= 0;
      end
    end
  end

  task automatic op(input bit w, input int a, input logic [31:0] d, output logic [31:0] r);
    wait (rdy);
    #3;
    we = w; addr = 10'(a); wdata = d;
    #2 ck = 1;
    wait (!rdy);
    if (!w) check(!q_v, "Q_V low during read");
    #4 ck = 0; we = 0; addr = '0;
    if (w) wait (rdy); else wait (rdy && q_v);
    r = q;
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] refm [1024];
  logic [31:0] r;
  initial begin
    ck = 0; we = 0; addr = 0; wdata = 0;
    #30 rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      refm[i * 7] = $urandom;
      op(1, i * 7, refm[i * 7], r);
    end
    for (int i = 0; i < 30; i++) begin
      op(0, i * 7, '0, r);
      check(r == refm[i * 7], $sformatf("read %0d: %h vs %h", i * 7, r, refm[i * 7]));
    end
    #100;
    check(nreq == 60, $sformatf("synchronous requests %0d", nreq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
