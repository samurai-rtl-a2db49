// pnu_ncb: Neural Compute Block (NCB) of the PNeuro accelerator.
//
// One NCB holds a multi-banked SRAM (NBANK banks of BANK_WORDS 32-bit words:
// 8 x 4 kB = 32 kB by default), an address generator, a routing unit and
// NPE = 8 processing elements working in SIMD. This block implements the
// fully-connected (FC) layer operation of the address generator:
//   out[p] = clamp((sum_i x[i] * W_p[i]) >>> shift, 0, 255),  p = 0..7
// Data layout: the input vector x lies in bank `in_bank` from word
// `in_base`, four bytes per word, byte k of a word being element 4*j+k
// (little endian); the weights of output p lie in bank p from word
// `w_base`, in the same order. The vector length is 4*n_groups. The 8
// results are written as two words at `out_base` of bank `out_bank`.
// Schedule: every bank is read once per group of four inputs (bank p for
// PE p's weights, bank in_bank for the inputs); the routing unit keeps the
// current group's words in registers and broadcasts x byte by byte while
// the next group is prefetched, so after a 3-cycle prologue the PEs do one
// MAC per cycle. A layer takes 4*n_groups + 7 cycles from `start` to
// `done`. A host port (`h_*`, used by the RISC-V over AHB to load weights
// and data and to read results) reaches any bank word while the NCB is
// idle; reads answer one cycle later with `h_rvalid`.
// The cluster controller and its instruction set are not part of this
// block: `start` and the layer fields stand for a decoded compute
// instruction. Other operations (convolution addressing, padding
// injection, inter-PE flows) are not implemented here.
module pnu_ncb
  import samurai_pkg::*;
#(
  parameter int unsigned NPE        = 8,
  parameter int unsigned NBANK      = 8,
  parameter int unsigned BANK_WORDS = 1024,
  localparam int unsigned BAW       = $clog2(BANK_WORDS),
  localparam int unsigned BSW       = $clog2(NBANK)
) (
  input  logic           clk,
  input  logic           rst_n,
  // layer command
  input  logic           start,
  input  logic [BAW-1:0] n_groups,
  input  logic [BSW-1:0] in_bank,
  input  logic [BAW-1:0] in_base,
  input  logic [BAW-1:0] w_base,
  input  logic [BSW-1:0] out_bank,
  input  logic [BAW-1:0] out_base,
  input  logic [4:0]     shift,
  input  logic           x_signed,
  output logic           busy,
  output logic           done,
  // host port
  input  logic           h_req,
  input  logic           h_we,
  input  logic [BSW-1:0] h_bank,
  input  logic [BAW-1:0] h_addr,
  input  logic [31:0]    h_wdata,
  output logic [31:0]    h_rdata,
  output logic           h_rvalid
);

  typedef enum logic [2:0] {N_IDLE, N_PRO0, N_PRO1, N_PRO2, N_RUN, N_ACT, N_WR0, N_WR1} nstate_e;
  nstate_e state;
  logic [1:0]     phase;
  logic [BAW-1:0] g;
  logic           more;   // another group follows the current one
  assign more = (g + 1'b1) < n_groups;

  // ---- banks ---------------------------------------------------------------
  logic [31:0]    b_rd   [NBANK];
  logic [BAW-1:0] b_addr [NBANK];
  logic           b_we   [NBANK];
  logic [31:0]    b_wd   [NBANK];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [31:0] mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (b_we[b]) mem[b_addr[b]] <= b_wd[b];
      b_rd[b] <= mem[b_addr[b]];
    end
  end

  // ---- routing registers -----------------------------------------------------
  logic [31:0] wcur [NPE];
  logic [31:0] wnext [NPE];
  logic [31:0] xcur, xnext;
  logic [7:0]  out8 [NPE];

  // bank port control
  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      b_addr[b] = '0;
      b_we[b]   = 1'b0;
      b_wd[b]   = '0;
    end
    unique case (state)
      N_IDLE: if (h_req) begin
        b_addr[h_bank] = h_addr;
        b_we[h_bank]   = h_we;
        b_wd[h_bank]   = h_wdata;
      end
      N_PRO0: for (int b = 0; b < NBANK; b++) b_addr[b] = w_base;
      N_PRO1: b_addr[in_bank] = in_base;
      N_RUN: begin
        if (phase == 2'd0) for (int b = 0; b < NBANK; b++) b_addr[b] = w_base + g + 1'b1;
        if (phase == 2'd1) b_addr[in_bank] = in_base + g + 1'b1;
      end
      N_WR0: begin
        b_addr[out_bank] = out_base;
        b_we[out_bank]   = 1'b1;
        b_wd[out_bank]   = {out8[3], out8[2], out8[1], out8[0]};
      end
      N_WR1: begin
        b_addr[out_bank] = out_base + 1'b1;
        b_we[out_bank]   = 1'b1;
        b_wd[out_bank]   = {out8[7], out8[6], out8[5], out8[4]};
      end
      default: ;
    endcase
  end

  // ---- sequencer -------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= N_IDLE;
      phase    <= '0;
      g        <= '0;
      xcur     <= '0;
      xnext    <= '0;
      h_rvalid <= 1'b0;
      for (int p = 0; p < NPE; p++) begin
        wcur[p]  <= '0;
        wnext[p] <= '0;
      end
    end else begin
      h_rvalid <= (state == N_IDLE) && h_req && !h_we;
      unique case (state)
        N_IDLE: if (start && n_groups != '0) begin
          g     <= '0;
          state <= N_PRO0;
        end
        N_PRO0: state <= N_PRO1;
        N_PRO1: begin
          for (int p = 0; p < NPE; p++) wcur[p] <= b_rd[p % NBANK];
          state <= N_PRO2;
        end
        N_PRO2: begin
          xcur  <= b_rd[in_bank];
          phase <= '0;
          state <= N_RUN;
        end
        N_RUN: begin
          phase <= phase + 1'b1;
          if (phase == 2'd1) for (int p = 0; p < NPE; p++) wnext[p] <= b_rd[p % NBANK];
          if (phase == 2'd2) xnext <= b_rd[in_bank];
          if (phase == 2'd3) begin
            if (more) begin
              g    <= g + 1'b1;
              xcur <= xnext;
              for (int p = 0; p < NPE; p++) wcur[p] <= wnext[p];
            end else begin
              state <= N_ACT;
            end
          end
        end
        N_ACT: state <= N_WR0;
        N_WR0: state <= N_WR1;
        N_WR1: state <= N_IDLE;
        default: state <= N_IDLE;
      endcase
    end
  end

  assign busy    = (state != N_IDLE);
  assign done    = (state == N_WR1);
  assign h_rdata = b_rd[h_bank];

  // ---- SIMD processing elements --------------------------------------------------
  pe_op_e      op;
  logic [7:0]  xb;
  logic [31:0] acc  [NPE];
  logic [7:0]  r8   [NPE];

  always_comb begin
    unique case (state)
      N_PRO0:  op = PE_CLR;
      N_RUN:   op = PE_MAC;
      N_ACT:   op = PE_ACT;
      default: op = PE_NOP;
    endcase
  end
  assign xb = xcur[8*phase +: 8];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pnu_pe u_pe (
      .clk, .rst_n, .op, .x(xb), .w(wcur[p][8*phase +: 8]), .x_signed,
      .rf_idx(2'd0), .shift,
      .nb8_in (p == 0 ? 8'd0  : r8[(p + NPE - 1) % NPE]),
      .nb32_in(p == 0 ? 32'd0 : acc[(p + NPE - 1) % NPE]),
      .acc(acc[p]), .r8(r8[p]), .out8(out8[p])
    );
  end

endmodule
