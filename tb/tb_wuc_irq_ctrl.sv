// tb_wuc_irq_ctrl: self-checking test of the WuC interrupt controller.
// Sets random enables and trigger modes for the 16 sources, drives random
// activity on GPIO, DBB and OD inputs and random software-interrupt writes,
// and compares PENDING every cycle against a reference model written in the
// testbench (edge / level detection, enable masking, clear by the scheduler
// port and by register write).
module tb_wuc_irq_ctrl;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, we, dbb_irq, clr_valid;
  logic [3:0] addr, clr_id;
  logic [31:0] wdata, rdata;
  logic [7:0] gpio_in;
  logic [2:0] od_irq;
  logic [15:0] pending;

  wuc_irq_ctrl dut (.*);

  int checks = 0, failures = 0, nset = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] en_m, pend_m, src_m, srcq_m;
  logic [31:0] mode_m;

  initial begin
    #300000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; dbb_irq = 0; clr_valid = 0; clr_id = 0;
    gpio_in = 0; od_irq = 0;
    en_m = 0; pend_m = 0; srcq_m = 0; mode_m = 0;
    #20 rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 0; wdata = {16'd0, 16'($urandom)};
      @(posedge clk); en_m = wdata[15:0]; srcq_m = {4'd0, od_irq, dbb_irq, gpio_in};
      pend_m = pend_m | 16'(0);
      // register writes also advance the model one cycle
      @(negedge clk);
      addr = 1; wdata = $urandom;
      @(posedge clk); mode_m = wdata;
      @(negedge clk); req = 0; we = 0;
      @(posedge clk);
      pend_m = pending;      // resynchronise the model after configuration
      srcq_m = {4'd0, od_irq, dbb_irq, gpio_in};
      for (int cyc = 0; cyc < 400; cyc++) begin
        logic [15:0] src, hit, clr;
        @(negedge clk);
        gpio_in = ($urandom_range(0, 3) == 0) ? 8'($urandom) : gpio_in;
        dbb_irq = ($urandom_range(0, 9) == 0);
        od_irq  = ($urandom_range(0, 5) == 0) ? 3'($urandom) : od_irq;
        clr_valid = ($urandom_range(0, 2) == 0);
        clr_id = 4'($urandom);
        req = 0; we = 0;
        if ($urandom_range(0, 7) == 0) begin req = 1; we = 1; addr = 3; wdata = 32'($urandom_range(0, 15)); end
        else if ($urandom_range(0, 15) == 0) begin req = 1; we = 1; addr = 2; wdata = 32'($urandom); end
        else begin addr = 2; end
        src = {(req && we && addr == 3) ? wdata[3:0] : 4'd0, od_irq, dbb_irq, gpio_in};
        for (int i = 0; i < 16; i++) begin
          case (mode_m[2*i +: 2])
            2'd0: hit[i] = src[i] && !srcq_m[i];
            2'd1: hit[i] = !src[i] && srcq_m[i];
            2'd2: hit[i] = src[i];
            default: hit[i] = !src[i];
          endcase
        end
        clr = (clr_valid ? 16'(1) << clr_id : 16'd0) | ((req && we && addr == 2) ? wdata[15:0] : 16'd0);
        pend_m = (pend_m & ~clr) | (hit & en_m);
        srcq_m = src;
        @(posedge clk); #1;
        nset += $countones(hit & en_m);
        check(pending == pend_m, $sformatf("pending %h vs model %h", pending, pend_m));
      end
    end
    @(negedge clk); req = 0; addr = 2; #1;
    check(rdata[15:0] == pending, "PENDING register readback");
    check(nset > 100, $sformatf("interrupts raised %0d", nset));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
