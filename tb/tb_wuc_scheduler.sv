// tb_wuc_scheduler: self-checking test of the run-to-completion event front end.
// Testbench models: a TP-SRAM power handshake (SLEEP_ACK follows SLEEP_REQ
// after a few cycles), a system bus that answers a fetch after a fixed
// latency with a word derived from the address, and an execution core that
// finishes each routine after a random time. Checks: nothing happens without
// an interrupt; the memory is woken before the fetch and put to sleep after
// the last routine; the fetch address is the routine entry (16 * id); the
// interrupt taken is cleared; interrupts are served lowest number first;
// interrupts arriving during a routine are chained without sleeping; and the
// reported wake-up time equals the measured cycles from event to fetch.
module tb_wuc_scheduler;
  import samurai_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] pending;
  logic clr_valid, sleep_req, s_req, exec_start, exec_done, wuc_idle;
  logic sleep_ack = 0, s_ready = 0;
  logic [3:0] clr_id, exec_id;
  logic [15:0] s_addr, wake_cycles;
  logic [31:0] s_rdata, exec_instr;

  wuc_scheduler #(.VEC_STRIDE(16)) dut (.*);

  int checks = 0, failures = 0, nstart = 0, nsleep = 0, nchain = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // TP-SRAM power handshake model: 4 cycles
  always @(posedge clk) begin
    repeat (3) @(posedge clk);
    sleep_ack <= !sleep_req;
  end
  // bus model: 3-cycle latency, data = addr ^ pattern
  always @(posedge clk) begin
    s_ready <= 0;
    if (s_req && !s_ready) begin
      check(sleep_ack, "fetch only with the memory awake");
      repeat (2) @(posedge clk);
      s_rdata <= {16'hF00D, s_addr};
      s_ready <= 1;
      @(posedge clk);
      s_ready <= 0;
    end
  end
  // pending register model with clear
  logic [15:0] raise;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) pending <= '0;
    else pending <= (pending & ~(clr_valid ? 16'(1) << clr_id : 16'd0)) | raise;
  end

  int t_event, t_fetch;
  logic sleep_req_q = 1;
  always @(posedge clk) begin
    if (wuc_idle && |pending) t_event = $time;
    if (s_ready) t_fetch = $time;
    if (sleep_req && !sleep_req_q) nsleep++;
    sleep_req_q <= sleep_req;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ids [$];
  // execution core model
  initial begin
    exec_done = 0;
    forever begin
      @(posedge clk iff exec_start);
      nstart++;
      ids.push_back(exec_id);
      check(exec_instr == {16'hF00D, 16'(exec_id) * 16'd16}, $sformatf("first instruction of routine %0d", exec_id));
      repeat ($urandom_range(2, 10)) @(posedge clk);
      @(negedge clk); exec_done = 1;
      @(negedge clk); exec_done = 0;
    end
  end

  initial begin
    raise = 0;
    #20 rst_n = 1;
    repeat (20) @(posedge clk);
    check(wuc_idle && sleep_req && nstart == 0, "idle without interrupt");
    // single event
    @(negedge clk); raise = 16'h0020; @(negedge clk); raise = 0;
    wait (nstart == 1);
    wait (wuc_idle);
    check(ids[0] == 5, "routine 5");
    check(pending == 0, "pending cleared");
    check(sleep_req && nsleep == 1, "memory sent back to sleep");
    check(wake_cycles == 16'((t_fetch - t_event) / 10), $sformatf("wake-up cycles %0d vs measured %0d", wake_cycles, (t_fetch - t_event) / 10));
    // three simultaneous events: 3, 9, 12 in that order, one sleep at the end
    @(negedge clk); raise = 16'h1208; @(negedge clk); raise = 0;
    wait (nstart == 2);
    // event during routine -> chained
    @(negedge clk); raise = 16'h0002; @(negedge clk); raise = 0;
    wait (nstart == 5);
    wait (wuc_idle);
    check(ids[1] == 3, "lowest first");
    check(ids[2] == 1 && ids[3] == 9 && ids[4] == 12, $sformatf("order %0d %0d %0d", ids[2], ids[3], ids[4]));
    check(nsleep == 2, $sformatf("one sleep per burst (%0d)", nsleep));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
