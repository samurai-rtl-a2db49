// feram_model: behavioural model of an SPI FeRAM for the testbenches.
// Mode 0 SPI slave. A frame starts when `csn` falls; the first 24 bits on
// MOSI are the control word {cmd[4:0], byte_address[18:0]}; cmd 5'b00011
// reads and 5'b00010 writes, from the address upwards, MSB first, for as
// long as the frame lasts. Unwritten bytes read as a fixed function of
// their address (init_byte), so a testbench can predict them. The model
// counts frames and SCK periods for the link-efficiency check.
module feram_model (
  input  logic csn,
  input  logic sck,
  input  logic mosi,
  output logic miso
);
  logic [7:0] mem [int];
  int unsigned frames = 0, sck_cycles = 0;
  logic [23:0] ctrl;
  logic [7:0]  wbyte, rbyte;
  int          nbit;
  int unsigned addr;

  function automatic logic [7:0] init_byte(input int unsigned a);
    return 8'(a * 37 + (a >> 8) + 5);
  endfunction
  function automatic logic [7:0] rd(input int unsigned a);
    return mem.exists(a) ? mem[a] : init_byte(a);
  endfunction

  initial miso = 1'b0;

  always @(negedge csn) begin
    nbit = 0;
    frames++;
  end

  always @(posedge sck) if (!csn) begin
    sck_cycles++;
    if (nbit < 24) begin
      ctrl = {ctrl[22:0], mosi};
      if (nbit == 23) addr = ctrl[18:0];
    end else if (ctrl[23:19] == 5'b00010) begin
      wbyte = {wbyte[6:0], mosi};
      if ((nbit - 24) % 8 == 7) begin
        mem[addr] = wbyte;
        addr++;
      end
    end
    nbit++;
  end

  always @(negedge sck) if (!csn && nbit >= 24 && ctrl[23:19] == 5'b00011) begin
    if ((nbit - 24) % 8 == 0) begin
      rbyte = rd(addr);
      addr++;
    end
    miso = rbyte[7 - (nbit - 24) % 8];
  end
endmodule
