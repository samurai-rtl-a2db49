// nvm_icache: instruction cache of the NVM controller, for in-place
// execution of RISC-V code stored in the external FeRAM.
//
// Direct-mapped, LINES = 4 sets of LINE_WORDS = 8 words of 32 bits, as in
// the paper. A fetch address is a 32-bit word address inside the 512 kB
// NVM (17 bits): bits [2:0] pick the word in the line, [4:3] the set and
// [16:5] are the tag. Fetch port: `f_req` with `f_addr` is held until
// `f_ready`; on a hit `f_ready` and `f_rdata` answer in the same cycle
// (zero-wait hit). On a miss the cache asks the FeRAM controller for the
// whole line (`r_req` held with `r_line`, answered by a one-cycle `r_done`
// with the 256-bit line in `r_data`), writes it, and then answers the
// fetch on the next cycle. `flush` invalidates every line, for use when the
// NVM has been rewritten. Lines are only ever read by the core, so there is
// no write path. The same-cycle hit and the flush input are this design's
// choices; the paper gives the organisation only.
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module nvm_icache #(
  parameter int unsigned LINES      = 4,
  parameter int unsigned LINE_WORDS = 8,
  parameter int unsigned NVM_BYTES  = 524288,
  localparam int unsigned WAW = $clog2(NVM_BYTES / 4),      // word address bits
  localparam int unsigned OFW = $clog2(LINE_WORDS),
  localparam int unsigned IXW = $clog2(LINES),
  localparam int unsigned TGW = WAW - OFW - IXW,
  localparam int unsigned LAW = WAW - OFW                   // line address bits
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    flush,
  // fetch port (RISC-V instruction side)
  input  logic                    f_req,
  input  logic [WAW-1:0]          f_addr,
  output logic                    f_ready,
  output logic [31:0]             f_rdata,
  // refill port (to the FeRAM controller)
  output logic                    r_req,
  output logic [LAW-1:0]          r_line,
  input  logic                    r_done,
  input  logic [32*LINE_WORDS-1:0] r_data,
  // statistics
  output logic                    hit_o,
  output logic                    miss_o
);

  logic [32*LINE_WORDS-1:0] data [LINES];
  logic [TGW-1:0]           tag  [LINES];
  logic [LINES-1:0]         valid;

  logic [OFW-1:0] off;
  logic [IXW-1:0] idx;
  logic [TGW-1:0] ftag;
  logic           hit;
  assign off  = f_addr[OFW-1:0];
  assign idx  = f_addr[OFW +: IXW];
  assign ftag = f_addr[WAW-1 -: TGW];
  assign hit  = valid[idx] && (tag[idx] == ftag);

  typedef enum logic [1:0] {I_LOOKUP, I_REFILL} istate_e;
  istate_e state;

  assign f_ready = (state == I_LOOKUP) && f_req && hit;
  assign f_rdata = data[idx][32*off +: 32];
  assign r_req   = (state == I_REFILL);
  assign r_line  = f_addr[WAW-1:OFW];
  assign hit_o   = f_ready;
  assign miss_o  = (state == I_LOOKUP) && f_req && !hit && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= I_LOOKUP;
      valid <= '0;
    end else if (flush) begin
      valid <= '0;
      state <= I_LOOKUP;
    end else begin
      unique case (state)
        I_LOOKUP: if (f_req && !hit) state <= I_REFILL;
        I_REFILL: if (r_done) begin
          valid[idx] <= 1'b1;
          state      <= I_LOOKUP;
        end
        default: state <= I_LOOKUP;
      endcase
    end
  end

  // line storage (no reset needed: guarded by `valid`)
  always_ff @(posedge clk) begin
    if (state == I_REFILL && r_done) begin
      data[idx] <= r_data;
      tag[idx]  <= ftag;
    end
  end

  // the fetch address must not change while a refill is outstanding
  a_addr_held: assert property (@(posedge clk) disable iff (!rst_n)
    (state == I_REFILL) |-> (f_req && $stable(f_addr)));

endmodule
