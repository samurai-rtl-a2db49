// tb_feram_ctrl: self-checking test of the FeRAM controller with an SPI
// FeRAM model. Random data-word writes and reads, instruction-line reads
// (8 words, word 0 first) of written and unwritten areas, simultaneous
// line and data requests (served alternately), the frame length on the
// SPI link (280 SCK periods per line, i.e. 256/280 = 91% payload) and the
// refill latency in clock cycles.
module tb_feram_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         i_req = 0, i_done, d_req = 0, d_we = 0, d_done;
  logic [13:0]  i_line = 0;
  logic [255:0] i_data;
  logic [16:0]  d_addr = 0;
  logic [31:0]  d_wdata = 0, d_rdata;
  logic         spi_csn, spi_sck, spi_mosi, spi_miso;

  feram_ctrl dut (.*);
  feram_model u_mem (.csn(spi_csn), .sck(spi_sck), .mosi(spi_mosi), .miso(spi_miso));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference memory, word granularity (big-endian bytes in the FeRAM)
  logic [31:0] refw [int];
  function automatic logic [31:0] ref_word(input int unsigned wa);
    if (refw.exists(wa)) return refw[wa];
    return {u_mem.init_byte(4*wa), u_mem.init_byte(4*wa+1), u_mem.init_byte(4*wa+2), u_mem.init_byte(4*wa+3)};
  endfunction

  task automatic dacc(input bit w, input logic [16:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); d_req = 1; d_we = w; d_addr = a; d_wdata = d;
    @(posedge clk iff d_done);
    r = d_rdata;
    @(negedge clk); d_req = 0;
  endtask
  task automatic iline(input logic [13:0] l, output logic [255:0] r, output int cyc);
    @(negedge clk); i_req = 1; i_line = l; cyc = 0;
    do begin @(posedge clk); cyc++; end while (!i_done);
    r = i_data;
    @(negedge clk); i_req = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    logic [255:0] line;
    int cyc, f0, s0;
    #20 rst_n = 1;
    // data writes and reads
    for (int i = 0; i < 20; i++) begin
      logic [16:0] a; a = 17'($urandom_range(0, 255));
      refw[a] = $urandom;
      dacc(1, a, refw[a], r);
    end
    for (int i = 0; i < 30; i++) begin
      logic [16:0] a; a = 17'($urandom_range(0, 300));
      dacc(0, a, '0, r);
      check(r == ref_word(a), $sformatf("data read %0d: %h vs %h", a, r, ref_word(a)));
    end
    // line reads
    for (int i = 0; i < 12; i++) begin
      logic [13:0] l; l = (i < 6) ? 14'($urandom_range(0, 7)) : 14'($urandom);
      f0 = u_mem.frames; s0 = u_mem.sck_cycles;
      iline(l, line, cyc);
      for (int w = 0; w < 8; w++)
        check(line[32*w +: 32] == ref_word(8*l + w), $sformatf("line %0d word %0d", l, w));
      check(u_mem.frames - f0 == 1 && u_mem.sck_cycles - s0 == 280,
            $sformatf("one frame of 280 SCK periods (%0d)", u_mem.sck_cycles - s0));
      check(cyc == 2 + 2 * 280 + 2, $sformatf("line refill latency %0d cycles", cyc));
    end
    check(256.0 / 280.0 > 0.91, "payload efficiency above 91%");
    // simultaneous requests: both served, alternately
    begin
      int order [$];
      @(negedge clk); i_req = 1; i_line = 14'd3; d_req = 1; d_we = 0; d_addr = 17'd9;
      fork
        begin @(posedge clk iff i_done); order.push_back(1); @(negedge clk); i_req = 0; end
        begin @(posedge clk iff d_done); order.push_back(0); r = d_rdata; @(negedge clk); d_req = 0; end
      join
      check(r == ref_word(9), "data read beside a refill");
      check(order.size() == 2 && order[0] == 0, "data first after a line refill");
      dacc(0, 17'd11, '0, r);
      @(negedge clk); i_req = 1; i_line = 14'd4; d_req = 1; d_we = 0; d_addr = 17'd10;
      order.delete();
      fork
        begin @(posedge clk iff i_done); order.push_back(1); @(negedge clk); i_req = 0; end
        begin @(posedge clk iff d_done); order.push_back(0); @(negedge clk); d_req = 0; end
      join
      check(order[0] == 1, "line first after a data access");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
