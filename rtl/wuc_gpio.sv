// wuc_gpio: GPIO controller of the Wake-up Controller.
//
// Eight pads on which sensors are connected. Each pad has an output value
// and an output enable; pad inputs pass through a two-flop synchroniser and
// are offered both to the register bus and to the interrupt controller as
// wake-up sources. Registers (word offsets): 0 OUT, 1 OE, 2 IN (read only).
// Register bus: one-cycle `req` with `we`, `addr`, `wdata`; `rdata`
// combinational on `addr`. Input synchronisation, register map and reset
// values (all pads inputs) are this design's choices.
module wuc_gpio #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic         we,
  input  logic [3:0]   addr,
  input  logic [31:0]  wdata,
  output logic [31:0]  rdata,
  input  logic [N-1:0] pad_in,
  output logic [N-1:0] pad_out,
  output logic [N-1:0] pad_oe,
  output logic [N-1:0] gpio_in_s
);

  logic [N-1:0] s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pad_out   <= '0;
      pad_oe    <= '0;
      s1        <= '0;
      gpio_in_s <= '0;
    end else begin
      s1        <= pad_in;
      gpio_in_s <= s1;
      if (req && we) begin
        if (addr == 4'd0) pad_out <= wdata[N-1:0];
        if (addr == 4'd1) pad_oe  <= wdata[N-1:0];
      end
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      4'd0:    rdata[N-1:0] = pad_out;
      4'd1:    rdata[N-1:0] = pad_oe;
      4'd2:    rdata[N-1:0] = gpio_in_s;
      default: ;
    endcase
  end

endmodule
