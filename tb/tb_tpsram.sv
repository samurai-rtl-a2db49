// tb_tpsram: self-checking test of the two-port TP-SRAM.
// Plays the four-phase protocol on both ports directly from the testbench:
// wake-up through SLEEP_REQ/SLEEP_ACK (with its latency), writes on WRP,
// reads on WRP and RP against a reference array, concurrent RP reads and WRP
// writes, Q_V falling at the start of each read, RDY low while asleep, and
// retention of the array across a sleep period.
module tb_tpsram;
  localparam int WORDS = 256;
  localparam int AW = $clog2(WORDS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sleep_req, sleep_ack;
  logic wrp_ck, wrp_we, wrp_rdy, wrp_q_v, rp_ck, rp_rdy, rp_q_v;
  logic [AW-1:0] wrp_addr, rp_addr;
  logic [31:0] wrp_wdata, wrp_q, rp_q;

  tpsram #(.WORDS(WORDS), .WAKE_CYCLES(2)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wrp_op(input bit we, input int a, input logic [31:0] d, output logic [31:0] q);
    wait (wrp_rdy);
    @(negedge clk);
    wrp_we = we; wrp_addr = AW'(a); wrp_wdata = d; wrp_ck = 1;
    wait (!wrp_rdy);
    if (!we) check(!wrp_q_v, "WRP Q_V low during read");
    @(negedge clk); wrp_ck = 0;
    if (we) wait (wrp_rdy);
    else    wait (wrp_rdy && wrp_q_v);
    q = wrp_q;
  endtask

  task automatic rp_op(input int a, output logic [31:0] q);
    wait (rp_rdy);
    @(negedge clk);
    rp_addr = AW'(a); rp_ck = 1;
    wait (!rp_rdy);
    check(!rp_q_v, "RP Q_V low during read");
    @(negedge clk); rp_ck = 0;
    wait (rp_q_v);
    q = rp_q;
    wait (rp_rdy);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0, t1;
  logic [31:0] q;
  initial begin
    sleep_req = 1; wrp_ck = 0; rp_ck = 0; wrp_we = 0; wrp_addr = 0; rp_addr = 0; wrp_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!sleep_ack && !rp_rdy && !wrp_rdy, "asleep after reset, ports not ready");
    // wake-up: 2 sync + WAKE_CYCLES+1 state cycles
    @(negedge clk); sleep_req = 0; t0 = $time;
    wait (sleep_ack); t1 = $time;
    check((t1 - t0) / 10 <= 6 && (t1 - t0) / 10 >= 3, $sformatf("wake latency %0d cycles", (t1 - t0) / 10));
    // fill through WRP
    for (int i = 0; i < 32; i++) begin
      ref_mem[i] = $urandom;
      wrp_op(1, i, ref_mem[i], q);
    end
    // read back on WRP and RP
    for (int i = 0; i < 32; i += 3) begin
      wrp_op(0, i, '0, q);
      check(q == ref_mem[i], $sformatf("WRP read %0d: %h vs %h", i, q, ref_mem[i]));
    end
    for (int i = 0; i < 32; i++) begin
      rp_op(i, q);
      check(q == ref_mem[i], $sformatf("RP read %0d: %h vs %h", i, q, ref_mem[i]));
    end
    // concurrent: RP reads 0..15 while WRP writes 100..115
    fork
      for (int i = 0; i < 16; i++) begin
        logic [31:0] qq;
        rp_op(i, qq);
        check(qq == ref_mem[i], "concurrent RP read");
      end
      for (int i = 100; i < 116; i++) begin
        logic [31:0] qq;
        ref_mem[i] = 32'hA5000000 + i;
        wrp_op(1, i, ref_mem[i], qq);
      end
    join
    // sleep, check RDY low, wake, check retention
    @(negedge clk); sleep_req = 1;
    wait (!sleep_ack);
    repeat (4) @(posedge clk);
    check(!rp_rdy && !wrp_rdy, "ports not ready while asleep");
    @(negedge clk); sleep_req = 0;
    wait (sleep_ack);
    for (int i = 100; i < 116; i++) begin
      rp_op(i, q);
      check(q == ref_mem[i], $sformatf("retained %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
