// wuc_irq_ctrl: wake-up interrupt controller (IT) of the Wake-up Controller.
//
// Sixteen sources: 8 GPIO inputs and 8 internal ones, of which 4 are
// hardware (1 from the digital baseband, 3 from the On-Demand sub-system)
// and 4 are software interrupts that the WuC raises itself by a register
// write (inter-task synchronisation, debug and test). For each source a
// register selects whether it may wake the WuC (ENABLE) and its triggering
// condition (MODE, 2 bits per source: rising edge, falling edge, high level,
// low level). A triggered, enabled source sets its PENDING bit; the
// scheduler clears the bit it takes. An edge is detected against the value
// of the previous cycle; a level source re-asserts PENDING as long as the
// level holds. Registers (word offsets): 0 ENABLE, 1 MODE, 2 PENDING (read;
// write 1 to clear), 3 SWSET (write 1 to raise software interrupts 0..3).
// The inputs are expected already synchronised (the GPIO controller does
// it). The trigger encoding and register map are this design's choices.
module wuc_irq_ctrl
  import samurai_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req,
  input  logic              we,
  input  logic [3:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  input  logic [7:0]        gpio_in,
  input  logic              dbb_irq,
  input  logic [2:0]        od_irq,
  input  logic              clr_valid,
  input  logic [3:0]        clr_id,
  output logic [N_IRQ-1:0]  pending
);

  logic [N_IRQ-1:0]   enable, src, src_q, hit, sw_set, reg_clr;
  logic [2*N_IRQ-1:0] mode;

  assign sw_set  = (req && we && addr == 4'd3) ? {wdata[3:0], 12'd0} : '0;
  assign reg_clr = (req && we && addr == 4'd2) ? wdata[N_IRQ-1:0] : '0;
  // software sources are pulses from register writes
  assign src = {sw_set[15:12], od_irq, dbb_irq, gpio_in};

  always_comb begin
    for (int i = 0; i < N_IRQ; i++) begin
      unique case (trig_e'(mode[2*i +: 2]))
        TRIG_RISE: hit[i] =  src[i] && !src_q[i];
        TRIG_FALL: hit[i] = !src[i] &&  src_q[i];
        TRIG_HIGH: hit[i] =  src[i];
        TRIG_LOW:  hit[i] = !src[i];
        default:   hit[i] = 1'b0;
      endcase
    end
  end

  logic [N_IRQ-1:0] clr_vec;
  assign clr_vec = (clr_valid ? (N_IRQ'(1) << clr_id) : '0) | reg_clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable  <= '0;
      mode    <= '0;
      src_q   <= '0;
      pending <= '0;
    end else begin
      src_q   <= src;
      pending <= (pending & ~clr_vec) | (hit & enable);
      if (req && we && addr == 4'd0) enable <= wdata[N_IRQ-1:0];
      if (req && we && addr == 4'd1) mode   <= wdata;
    end
  end

  always_comb begin
    unique case (addr)
      4'd0:    rdata = {16'd0, enable};
      4'd1:    rdata = mode;
      4'd2:    rdata = {16'd0, pending};
      default: rdata = '0;
    endcase
  end

endmodule
