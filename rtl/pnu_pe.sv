// pnu_pe: processing element (PE) of the PNeuro neural-network accelerator.
//
// Datapath, as described for the accelerator: 8-bit data natively, a 9-bit x
// 9-bit multiplier as first stage of the multiply-accumulate (so unsigned
// 8-bit image pixels and signed 8-bit weights are both exact), a 32-bit
// accumulator as second stage, a small register file holding products for
// multiply-only dataflows, an 8-bit ALU, an activation unit (linear
// rectification) and two neighbour links, 8-bit and 32-bit, to the next PE of
// the cluster. All PEs of a cluster receive the same operation (SIMD).
// One operation per cycle, results registered:
//   CLR    acc <= 0                       MAC    acc <= acc + x*w
//   MUL_RF rf[rf_idx] <= x*w              ACC_RF acc <= acc + rf[rf_idx]
//   ADD8   r8 <= sat8(x + w)              MAX8   r8 <= max(x, w)
//   ACT    out8 <= clamp(acc >>> shift, 0, 255) (ReLU then 8-bit range)
//   NB32   acc <= nb32_in                 NB8    r8 <= nb8_in
// `x_signed` selects whether x is a signed or an unsigned byte; w is
// always signed. The register-file depth (4), the ALU operation set, the
// ALU's signed saturation and the requantisation shift in the activation
// are this design's choices.
module pnu_pe
  import samurai_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  pe_op_e      op,
  input  logic [7:0]  x,
  input  logic [7:0]  w,
  input  logic        x_signed,
  input  logic [1:0]  rf_idx,
  input  logic [4:0]  shift,
  input  logic [7:0]  nb8_in,
  input  logic [31:0] nb32_in,
  output logic [31:0] acc,
  output logic [7:0]  r8,
  output logic [7:0]  out8
);

  logic signed [8:0]  x9, w9;
  logic signed [17:0] prod;
  logic signed [17:0] rf [4];

  assign x9   = x_signed ? {x[7], x} : {1'b0, x};
  assign w9   = {w[7], w};
  assign prod = x9 * w9;

  logic signed [8:0]  sum9;
  logic signed [7:0]  sat_sum;
  assign sum9    = $signed({x[7], x}) + $signed({w[7], w});
  assign sat_sum = (sum9 > 9'sd127) ? 8'sd127 : (sum9 < -9'sd128) ? -8'sd128 : sum9[7:0];

  logic signed [31:0] shifted;
  assign shifted = $signed(acc) >>> shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      r8   <= '0;
      out8 <= '0;
      for (int i = 0; i < 4; i++) rf[i] <= '0;
    end else begin
      unique case (op)
        PE_NOP:    ;
        PE_CLR:    acc <= '0;
        PE_MAC:    acc <= acc + 32'(prod);
        PE_MUL_RF: rf[rf_idx] <= prod;
        PE_ACC_RF: acc <= acc + 32'(rf[rf_idx]);
        PE_ADD8:   r8 <= sat_sum;
        PE_MAX8:   r8 <= ($signed(x) > $signed(w)) ? x : w;
        PE_ACT:    out8 <= (shifted < 0) ? 8'd0 : (shifted > 32'sd255) ? 8'd255 : shifted[7:0];
        PE_NB32:   acc <= nb32_in;
        PE_NB8:    r8 <= nb8_in;
        default:   ;
      endcase
    end
  end

endmodule
