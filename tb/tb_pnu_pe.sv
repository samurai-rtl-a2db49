// tb_pnu_pe: self-checking test of the PNeuro processing element.
// Random dot products (signed and unsigned data, signed weights) through
// MAC, multiply-only products through the register file and ACC_RF, the
// 8-bit ALU operations, the activation with shift and clamping, and the two
// neighbour links, all against integer arithmetic in the testbench.
module tb_pnu_pe;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_op_e op;
  logic [7:0] x, w, nb8_in, r8, out8;
  logic x_signed;
  logic [1:0] rf_idx;
  logic [4:0] shift;
  logic [31:0] nb32_in, acc;

  pnu_pe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_op(input pe_op_e o);
    @(negedge clk); op = o;
    @(negedge clk); op = PE_NOP;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = PE_NOP; x = 0; w = 0; x_signed = 0; rf_idx = 0; shift = 0; nb8_in = 0; nb32_in = 0;
    #20 rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int ref_acc, n, xi, wi;
      x_signed = t % 2;
      do_op(PE_CLR);
      ref_acc = 0;
      n = $urandom_range(1, 300);
      @(negedge clk);
      for (int i = 0; i < n; i++) begin
        x = 8'($urandom); w = 8'($urandom); op = PE_MAC;
        xi = x_signed ? int'($signed(x)) : int'(x);
        wi = int'($signed(w));
        ref_acc += xi * wi;
        @(negedge clk);
      end
      op = PE_NOP;
      @(negedge clk);
      check($signed(acc) == ref_acc, $sformatf("dot product %0d vs %0d", $signed(acc), ref_acc));
      shift = 5'($urandom_range(0, 8));
      do_op(PE_ACT);
      begin
        int s; s = ref_acc >>> shift;
        s = (s < 0) ? 0 : (s > 255) ? 255 : s;
        check(out8 == 8'(s), $sformatf("activation %0d vs %0d", out8, s));
      end
    end
    // multiply-only products through the register file
    do_op(PE_CLR);
    begin
      int ref_acc; ref_acc = 0;
      x_signed = 1;
      for (int i = 0; i < 4; i++) begin
        x = 8'($urandom); w = 8'($urandom); rf_idx = 2'(i);
        ref_acc += int'($signed(x)) * int'($signed(w));
        do_op(PE_MUL_RF);
      end
      check(acc == 0, "MUL_RF leaves the accumulator");
      for (int i = 0; i < 4; i++) begin rf_idx = 2'(i); do_op(PE_ACC_RF); end
      check($signed(acc) == ref_acc, "sum of register-file products");
    end
    // ALU
    for (int i = 0; i < 50; i++) begin
      int s;
      x = 8'($urandom); w = 8'($urandom);
      do_op(PE_ADD8);
      s = int'($signed(x)) + int'($signed(w));
      s = (s > 127) ? 127 : (s < -128) ? -128 : s;
      check($signed(r8) == s, "saturating add");
      do_op(PE_MAX8);
      check(r8 == (($signed(x) > $signed(w)) ? x : w), "max");
    end
    // neighbour links
    nb32_in = 32'hDEAD_BEEF; nb8_in = 8'h5C;
    do_op(PE_NB32); do_op(PE_NB8);
    check(acc == 32'hDEAD_BEEF && r8 == 8'h5C, "neighbour links");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
