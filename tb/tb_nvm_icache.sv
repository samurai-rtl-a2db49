// tb_nvm_icache: self-checking test of the direct-mapped instruction cache.
// A refill model answers line requests after a random delay with words
// that are a function of their address. Random fetch streams with
// sequential runs, loops and jumps are checked word by word; a reference
// model of a 4-set direct-mapped cache predicts every hit and miss, and
// hits must answer in the cycle of the request. A flush must force misses.
module tb_nvm_icache;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         flush = 0, f_req = 0, f_ready, r_req, r_done = 0, hit_o, miss_o;
  logic [16:0]  f_addr = 0;
  logic [31:0]  f_rdata;
  logic [13:0]  r_line;
  logic [255:0] r_data = 0;

  nvm_icache dut (.*);

  int checks = 0, failures = 0, nref = 0, hits = 0, misses = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] word_at(input logic [16:0] a);
    return {15'h5A5A, a} ^ 32'hC001_0000;
  endfunction

  // refill model
  always begin
    @(posedge clk iff r_req);
    repeat ($urandom_range(1, 6)) @(posedge clk);
    @(negedge clk);
    for (int w = 0; w < 8; w++) r_data[32*w +: 32] = word_at({r_line, 3'(w)});
    r_done = 1; nref++;
    @(negedge clk); r_done = 0;
  end

  // reference cache state
  logic [11:0] rtag [4];
  bit          rval [4];

  task automatic fetch(input logic [16:0] a);
    bit exp_hit;
    exp_hit = rval[a[4:3]] && rtag[a[4:3]] == a[16:5];
    @(negedge clk); f_req = 1; f_addr = a;
    #1 check(f_ready == exp_hit, $sformatf("hit prediction at %h", a));
    if (exp_hit) hits++; else misses++;
    while (!f_ready) begin @(negedge clk); #1; end
    check(f_rdata == word_at(a), $sformatf("fetched word at %h", a));
    rval[a[4:3]] = 1; rtag[a[4:3]] = a[16:5];
    @(posedge clk); #1 f_req = 0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [16:0] pc;
    for (int i = 0; i < 4; i++) rval[i] = 0;
    #20 rst_n = 1;
    pc = 17'h100;
    for (int n = 0; n < 600; n++) begin
      int k; k = $urandom_range(0, 9);
      fetch(pc);
      if (k < 7) pc = pc + 1'b1;                              // sequential
      else if (k < 9) pc = pc - 17'($urandom_range(1, 20));    // loop back
      else pc = 17'($urandom);                                 // jump
    end
    check(nref == misses, $sformatf("refills %0d = misses %0d", nref, misses));
    check(hits > 300 && misses > 20, $sformatf("hits %0d misses %0d", hits, misses));
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int i = 0; i < 4; i++) rval[i] = 0;
    fetch(pc);
    check(nref == misses, "miss after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
