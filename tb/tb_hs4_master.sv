// tb_hs4_master: self-checking test of the four-phase requester.
// A behavioural responder in the testbench answers CK with RDY low, then after
// a random delay drives Q / Q_V (reads) and raises RDY once CK is low. It
// keeps a reference memory. The test checks write-then-read data, that CK
// only rises while RDY is high, that address and data are stable while CK is
// high, and that `done` comes exactly once per request.
module tb_hs4_master;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, we, done, idle, ck, hs_we, rdy, q_v;
  logic [7:0] addr, hs_addr;
  logic [31:0] wdata, rdata, hs_wdata, q;

  hs4_master #(.AW(8), .DW(32), .SYNC(2)) dut (.*);

  int checks = 0, failures = 0, ndone = 0;
  logic [31:0] mem [256];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // responder
  initial begin
    rdy = 1; q_v = 0; q = '0;
    forever begin
      @(posedge clk);
      if (ck) begin
        logic [7:0] a; logic w; logic [31:0] d;
        a = hs_addr; w = hs_we; d = hs_wdata;
        if (!w) q_v = 0;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rdy = 0;
        while (ck) begin
          @(posedge clk);
          check(hs_addr == a || !ck, "address stable while CK high");
        end
        repeat ($urandom_range(0, 4)) @(posedge clk);
        if (w) mem[a] = d;
        else begin q = mem[a]; q_v = 1; end
        repeat ($urandom_range(0, 2)) @(posedge clk);
        rdy = 1;
      end
    end
  end

  // CK may rise only while RDY is high
  logic ck_q, rdy_q;
  always @(negedge clk) begin
    ck_q <= ck;
    rdy_q <= rdy;
    if (rst_n && ck && !ck_q && !rdy_q) begin failures++; $display("FAIL: CK rose with RDY low"); end
    if (done) ndone++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] refm [256];
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      refm[i] = $urandom;
      @(negedge clk); req = 1; we = 1; addr = 8'(i); wdata = refm[i];
      @(posedge clk iff done); @(negedge clk); req = 0;
    end
    for (int i = 39; i >= 0; i--) begin
      @(negedge clk); req = 1; we = 0; addr = 8'(i);
      @(posedge clk iff done);
      #1 check(rdata == refm[i], $sformatf("read %0d: %h vs %h", i, rdata, refm[i]));
      @(negedge clk); req = 0;
    end
    repeat (5) @(posedge clk);
    check(ndone == 80, $sformatf("done count %0d", ndone));
    check(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
