// tb_wuc_gpio: self-checking test of the WuC GPIO controller.
// Writes OUT and OE and checks the pads; drives random pad inputs and checks
// that they appear on the synchronised outputs and the IN register exactly
// two clock cycles later.
module tb_wuc_gpio;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, we;
  logic [3:0] addr;
  logic [31:0] wdata, rdata;
  logic [7:0] pad_in, pad_out, pad_oe, gpio_in_s;

  wuc_gpio #(.N(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] hist [3];
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; pad_in = 0;
    #20 rst_n = 1;
    check(pad_oe == 0, "all pads are inputs after reset");
    for (int i = 0; i < 20; i++) begin
      logic [7:0] o, e;
      o = 8'($urandom); e = 8'($urandom);
      @(negedge clk); req = 1; we = 1; addr = 0; wdata = {24'd0, o};
      @(negedge clk); addr = 1; wdata = {24'd0, e};
      @(negedge clk); req = 0; we = 0;
      check(pad_out == o && pad_oe == e, "OUT/OE on pads");
      addr = 0; #1 check(rdata[7:0] == o, "OUT readback");
      addr = 1; #1 check(rdata[7:0] == e, "OE readback");
    end
    addr = 2;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = pad_in;
      if (i >= 3) check(gpio_in_s == hist[1] && rdata[7:0] == hist[1], "input delayed by two cycles");
      pad_in = 8'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
