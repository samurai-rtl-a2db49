// tb_apb_master: self-checking test of the APB requester.
// A behavioural APB slave with random wait states and a register array
// answers; the test checks the SETUP-then-ACCESS sequence, the byte address
// (word address * 4), write data, read data and the number of wait cycles
// (a transfer with W wait states takes W + 3 cycles from request to done).
module tb_apb_master;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sreq, swe, sdone, err, psel, penable, pwrite, pready, pslverr;
  logic [12:0] saddr;
  logic [31:0] swdata, srdata, paddr, pwdata, prdata;

  apb_master #(.AW(13)) dut (.*);

  int checks = 0, failures = 0, waits;
  logic [31:0] regs [8192];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave
  logic psel_q = 0;
  int wcnt;
  always @(posedge clk) begin
    psel_q <= psel;
    if (psel && !penable) begin
      wcnt = 0;
    end
    if (psel && penable) begin
      if (wcnt < waits) begin
        wcnt++;
      end
    end
  end
  always_comb begin
    pready  = psel && penable && (wcnt >= waits);
    prdata  = regs[paddr[14:2]];
    pslverr = 1'b0;
  end
  always @(posedge clk) if (pready && pwrite) regs[paddr[14:2]] <= pwdata;
  logic setup_seen = 0;
  always @(negedge clk) begin
    if (psel && penable && !setup_seen) begin
      failures++; $display("FAIL: ACCESS without SETUP");
    end
    setup_seen <= psel;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] refm [64];
  initial begin
    sreq = 0; swe = 0; saddr = 0; swdata = 0; waits = 0;
    #20 rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      int n;
      refm[i] = $urandom;
      waits = $urandom_range(0, 3);
      @(negedge clk); sreq = 1; swe = 1; saddr = 13'(i * 5); swdata = refm[i];
      n = 0;
      do begin @(posedge clk); n++; #1; end while (!sdone);
      check(n == waits + 3, $sformatf("write cycles %0d with %0d waits", n, waits));
      check(paddr == 32'(i * 5) * 4, "byte address");
      @(negedge clk); sreq = 0;
    end
    for (int i = 0; i < 64; i++) begin
      waits = $urandom_range(0, 3);
      @(negedge clk); sreq = 1; swe = 0; saddr = 13'(i * 5);
      do @(posedge clk); while (!sdone);
      #1 check(srdata == refm[i], $sformatf("read %0d", i));
      @(negedge clk); sreq = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
