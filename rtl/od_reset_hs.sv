// od_reset_hs: reset handshake between the Wake-up Controller configuration
// registers (AR side) and the On-Demand (OD) domain.
//
// The WuC asks for the OD domain to be in reset with `od_reset_req` (or the OD
// supply is off). The OD reset `od_rst_n` is asserted at once and released
// synchronously to clk_od through a two-flop synchroniser; one clk_od cycle
// after release, OD_reset_ack rises, and it is brought back to the AR clock by
// two more flip-flops as `od_reset_ack`. So the WuC only interacts with the OD
// domain once that domain has really left reset, whatever the OD clock
// frequency. `od_reset_ack` is also the WRP arbitration-policy select
// (direct when low, round-robin on clk_od when high).
// Asserting reset lowers the acknowledge after the AR synchroniser delay.
// If clk_od is stopped while reset is released, the acknowledge never comes:
// the WuC is expected to enable the OD clock first.
module od_reset_hs (
  input  logic clk,          // AR-side clock
  input  logic rst_n,        // global reset
  input  logic od_reset_req, // from the configuration registers
  input  logic od_on,        // OD domain powered
  input  logic clk_od,
  output logic od_rst_n,     // reset of the OD domain
  output logic od_reset_ack  // OD out of reset, in the AR clock domain
);

  logic arst_od_n;
  assign arst_od_n = rst_n && !od_reset_req && od_on;

  logic [1:0] rsync;
  always_ff @(posedge clk_od or negedge arst_od_n) begin
    if (!arst_od_n) rsync <= '0;
    else            rsync <= {rsync[0], 1'b1};
  end
  assign od_rst_n = rsync[1];

  logic ack_od;
  always_ff @(posedge clk_od or negedge arst_od_n) begin
    if (!arst_od_n) ack_od <= 1'b0;
    else            ack_od <= od_rst_n;
  end

  logic [1:0] ack_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_sr <= '0;
    else        ack_sr <= {ack_sr[0], ack_od};
  end
  assign od_reset_ack = ack_sr[1];

endmodule
