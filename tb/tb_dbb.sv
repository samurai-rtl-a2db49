// tb_dbb: self-checking test of the digital baseband decoder.
// Sends OOK frames (alternating preamble, 8-bit identifier, 32-bit payload,
// most significant bit first) at two symbol widths, with sampling delays
// inside the symbol, and checks: the payload and a single interrupt for a
// frame with the right identifier; no interrupt for a wrong identifier; the
// interrupt arriving within the last symbol of the frame; and no decoding
// while disabled. Each '1' symbol is carrier for the first 3/4 of the
// symbol only, so a sampling point after that would read 0.
module tb_dbb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, rx, irq;
  logic [15:0] sym_width, data_delay;
  logic [7:0] id;
  logic [31:0] payload;

  dbb #(.MAX_HUNT(64)) dut (.*);

  int checks = 0, failures = 0, nirq = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) if (irq) nirq++;

  task automatic send_sym(input bit b);
    for (int c = 0; c < sym_width; c++) begin
      @(negedge clk);
      rx = b && (c < (sym_width * 3) / 4);
    end
  endtask

  task automatic send_frame(input logic [7:0] fid, input logic [31:0] pl);
    // preamble 1010 1010 starts with a 1, which gives the first edge
    for (int i = 0; i < 8; i++) send_sym(!(i % 2));
    for (int i = 7; i >= 0; i--) send_sym(fid[i]);
    for (int i = 31; i >= 0; i--) send_sym(pl[i]);
    @(negedge clk); rx = 0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx = 0; en = 1; sym_width = 16; data_delay = 6; id = 8'hC3;
    #20 rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      logic [31:0] pl;
      int n0;
      pl = $urandom;
      sym_width = (k % 2) ? 16'd24 : 16'd16;
      data_delay = (k % 2) ? 16'd10 : 16'd5;
      n0 = nirq;
      send_frame(id, pl);
      repeat (4) @(posedge clk);
      check(nirq == n0 + 1, $sformatf("frame %0d one interrupt (%0d)", k, nirq - n0));
      check(payload == pl, $sformatf("frame %0d payload %h vs %h", k, payload, pl));
      repeat (3 * sym_width) @(negedge clk);
    end
    // wrong identifier
    begin
      int n0; n0 = nirq;
      send_frame(8'h3C, 32'hFFFF_0000);
      repeat (70 * sym_width) @(negedge clk);
      check(nirq == n0, "no interrupt on another identifier");
    end
    // disabled
    begin
      int n0; n0 = nirq;
      en = 0;
      send_frame(id, 32'h1234_5678);
      repeat (4 * sym_width) @(negedge clk);
      check(nirq == n0, "no interrupt while disabled");
      en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
