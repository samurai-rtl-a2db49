// tb_pnu_ncb: self-checking test of the PNeuro neural compute block.
// Loads random signed weights and signed or unsigned inputs through the host
// port, runs fully-connected layers of random length and shift, and compares
// the 8 written outputs (read back through the host port) with integer
// arithmetic in the testbench. Also checks the layer timing of
// 4*n_groups + 7 cycles, one MAC per PE per cycle in steady state, that
// other bank words are untouched, and that `busy` covers the layer.
module tb_pnu_ncb;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start = 0, x_signed = 0, busy, done;
  logic [9:0]  n_groups = 0, in_base = 0, w_base = 0, out_base = 0, h_addr = 0;
  logic [2:0]  in_bank = 0, out_bank = 0, h_bank = 0;
  logic [4:0]  shift = 0;
  logic        h_req = 0, h_we = 0, h_rvalid;
  logic [31:0] h_wdata = 0, h_rdata;

  pnu_ncb dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic hwrite(input logic [2:0] b, input logic [9:0] a, input logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 1; h_bank = b; h_addr = a; h_wdata = d;
    @(negedge clk); h_req = 0; h_we = 0;
  endtask
  task automatic hread(input logic [2:0] b, input logic [9:0] a, output logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 0; h_bank = b; h_addr = a;
    @(negedge clk); h_req = 0;
    check(h_rvalid, "read valid one cycle later");
    d = h_rdata;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] xw [64];
  logic [31:0] ww [8][64];

  initial begin
    #20 rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int n, sum [8], cycles, busy_cycles;
      logic [31:0] d, guard;
      n        = (t == 0) ? 1 : $urandom_range(1, 64);
      x_signed = t % 2;
      shift    = 5'($urandom_range(0, 10));
      in_bank  = 3'($urandom);
      out_bank = 3'($urandom);
      w_base   = 10'($urandom_range(0, 100));
      in_base  = 10'($urandom_range(200, 300));
      out_base = 10'($urandom_range(400, 500));
      for (int j = 0; j < n; j++) begin
        xw[j] = $urandom;
        for (int p = 0; p < 8; p++) ww[p][j] = $urandom;
      end
      // weights first, then inputs (inputs may share a weight bank)
      for (int p = 0; p < 8; p++)
        for (int j = 0; j < n; j++) hwrite(3'(p), w_base + 10'(j), ww[p][j]);
      for (int j = 0; j < n; j++) hwrite(in_bank, in_base + 10'(j), xw[j]);
      guard = $urandom;
      hwrite(out_bank, out_base + 10'd2, guard);
      // reference
      for (int p = 0; p < 8; p++) begin
        sum[p] = 0;
        for (int j = 0; j < n; j++)
          for (int k = 0; k < 4; k++) begin
            logic [7:0] xb, wb;
            xb = xw[j][8*k +: 8];
            wb = ww[p][j][8*k +: 8];
            sum[p] += (x_signed ? int'($signed(xb)) : int'(xb)) * int'($signed(wb));
          end
      end
      // run
      n_groups = 10'(n);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1; busy_cycles = 0;
      while (!done) begin
        if (busy) busy_cycles++;
        @(negedge clk); cycles++;
        if (cycles > 1000) break;
      end
      check(cycles == 4 * n + 7 - 1, $sformatf("layer of %0d groups took %0d cycles after start", n, cycles));
      check(busy_cycles == cycles - 1, "busy during the layer");
      @(negedge clk);
      check(!busy, "idle after done");
      // compare
      for (int h = 0; h < 2; h++) begin
        hread(out_bank, out_base + 10'(h), d);
        for (int p = 4 * h; p < 4 * h + 4; p++) begin
          int s;
          s = sum[p] >>> shift;
          s = (s < 0) ? 0 : (s > 255) ? 255 : s;
          check(d[8*(p-4*h) +: 8] == 8'(s), $sformatf("layer %0d output %0d: %0d vs %0d", t, p, d[8*(p-4*h) +: 8], s));
        end
      end
      hread(out_bank, out_base + 10'd2, d);
      check(d == guard, "word after the outputs untouched");
    end
    // a zero-length command is ignored
    n_groups = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(!busy, "empty layer ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
