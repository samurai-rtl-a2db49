// wuc_scheduler: event handling front end of the Wake-up Core.
//
// The Wake-up Core follows a run-to-completion model: it waits for an
// interrupt, runs that interrupt's routine to the end, then runs the
// routines of interrupts that arrived in between, and only when none is left
// goes back to the zero-activity wait (IDLE), with the TP-SRAM asleep.
// This block sequences that, following the measured wake-up chronogram:
//   IDLE   : SLEEP_REQ high, nothing toggles;
//   DECODE : an enabled interrupt is pending; take the lowest-numbered one
//            and clear it in the IT controller;
//   WAKE   : lower SLEEP_REQ, wait for SLEEP_ACK (skipped if already awake);
//   FETCH  : read the routine's first instruction word through the system
//            bus (it goes to the TP-SRAM read port);
//   RUN    : hand `exec_id` and `exec_instr` to the execution core with a
//            one-cycle `exec_start`, wait for `exec_done`;
//   then DECODE again if anything is pending, else SLEEP: raise SLEEP_REQ,
//   wait for SLEEP_ACK low, back to IDLE.
// The routine of interrupt i starts at TP-SRAM word VEC_STRIDE*i; this entry
// rule and the lowest-number-first priority are this design's choices.
// `wake_cycles` holds, for the last wake-up from IDLE, the number of clk
// cycles from the pending interrupt to the end of the first fetch.
module wuc_scheduler
  import samurai_pkg::*;
#(
  parameter int unsigned VEC_STRIDE = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_IRQ-1:0] pending,
  output logic             clr_valid,
  output logic [3:0]       clr_id,
  // TP-SRAM power handshake
  output logic             sleep_req,
  input  logic             sleep_ack,
  // system bus (scheduler port)
  output logic             s_req,
  output logic [15:0]      s_addr,
  input  logic             s_ready,
  input  logic [31:0]      s_rdata,
  // execution core
  output logic             exec_start,
  output logic [3:0]       exec_id,
  output logic [31:0]      exec_instr,
  input  logic             exec_done,
  // status
  output logic             wuc_idle,
  output logic [15:0]      wake_cycles
);

  typedef enum logic [2:0] {W_IDLE, W_DECODE, W_WAKE, W_FETCH, W_RUN, W_SLEEP} wstate_e;
  wstate_e state;

  logic [3:0]  first_id;
  logic        any;
  logic [15:0] wcnt;
  logic        from_idle;

  always_comb begin
    first_id = '0;
    any      = |pending;
    for (int i = N_IRQ - 1; i >= 0; i--) begin
      if (pending[i]) first_id = 4'(i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= W_IDLE;
      sleep_req   <= 1'b1;
      exec_id     <= '0;
      exec_instr  <= '0;
      wcnt        <= '0;
      wake_cycles <= '0;
      from_idle   <= 1'b0;
    end else begin
      if (state != W_IDLE && state != W_RUN && state != W_SLEEP) wcnt <= wcnt + 1'b1;
      unique case (state)
        W_IDLE: if (any) begin
          state     <= W_DECODE;
          wcnt      <= 16'd1;
          from_idle <= 1'b1;
        end
        W_DECODE: begin
          exec_id   <= first_id;
          state     <= W_WAKE;
          sleep_req <= 1'b0;
        end
        W_WAKE: if (sleep_ack) state <= W_FETCH;
        W_FETCH: if (s_ready) begin
          exec_instr <= s_rdata;
          if (from_idle) wake_cycles <= wcnt;
          from_idle  <= 1'b0;
          state      <= W_RUN;
        end
        W_RUN: if (exec_done) begin
          if (any) begin
            state <= W_DECODE;
          end else begin
            state     <= W_SLEEP;
            sleep_req <= 1'b1;
          end
        end
        W_SLEEP: if (!sleep_ack) state <= W_IDLE;
        default: state <= W_IDLE;
      endcase
    end
  end

  assign clr_valid  = (state == W_DECODE);
  assign clr_id     = first_id;
  assign s_req      = (state == W_FETCH);
  assign s_addr     = 16'(exec_id) * 16'(VEC_STRIDE);
  assign wuc_idle   = (state == W_IDLE);

  // exec_start is a one-cycle pulse on entry to RUN
  logic run_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) run_q <= 1'b0;
    else        run_q <= (state == W_RUN);
  end
  assign exec_start = (state == W_RUN) && !run_q;

endmodule
