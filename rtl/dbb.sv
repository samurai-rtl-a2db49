// dbb: digital baseband of the wake-up radio.
//
// The wake-up radio delivers a demodulated on-off-keyed (OOK) bit stream on
// `rx` (1 = carrier present). A message carries an 8-bit identifier followed
// by a 32-bit payload, most significant bit first, possibly behind a
// preamble. The symbol width and the delay of the useful data inside a
// symbol are run-time settings (`sym_width`, `data_delay`, in clk cycles),
// so any OOK rate and duty shape can be decoded.
// Operation: in IDLE the first rising edge of `rx` marks the start of a
// symbol and starts a symbol counter; in each symbol, `rx` is sampled when
// the counter equals `data_delay`. In HUNT the samples slide through an
// 8-bit window; when the window equals `id`, the next 32 samples are
// collected as the payload (PAYLOAD), after which `irq` pulses for one cycle
// with `payload` updated, and the DBB returns to IDLE. A HUNT that sees
// MAX_HUNT symbols without a match returns to IDLE. `rx` is synchronised by
// two flip-flops. The symbol clock is free-running after the first edge (no
// resynchronisation on later edges); this, the bit order, MAX_HUNT and the
// idle-to-start rule are this design's choices.
module dbb #(
  parameter int unsigned MAX_HUNT = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        rx,
  input  logic [15:0] sym_width,
  input  logic [15:0] data_delay,
  input  logic [7:0]  id,
  output logic        irq,
  output logic [31:0] payload
);

  typedef enum logic [1:0] {D_IDLE, D_HUNT, D_PAYLOAD} dstate_e;
  dstate_e state;

  logic [2:0]  rx_sr;
  logic        rx_s, rx_rise;
  logic [15:0] cnt;
  logic [7:0]  win;
  logic [31:0] shreg;
  logic [5:0]  nbits;
  logic [$clog2(MAX_HUNT+1)-1:0] nhunt;
  logic        sample;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_sr <= '0;
    else        rx_sr <= {rx_sr[1:0], rx};
  end
  assign rx_s    = rx_sr[1];
  assign rx_rise = rx_sr[1] && !rx_sr[2];
  assign sample  = (state != D_IDLE) && (cnt == data_delay);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= D_IDLE;
      cnt     <= '0;
      win     <= '0;
      shreg   <= '0;
      nbits   <= '0;
      nhunt   <= '0;
      irq     <= 1'b0;
      payload <= '0;
    end else begin
      irq <= 1'b0;
      if (!en) begin
        state <= D_IDLE;
      end else begin
        // symbol timing
        if (state == D_IDLE) cnt <= 16'd1;
        else if (cnt == sym_width - 16'd1) cnt <= '0;
        else cnt <= cnt + 16'd1;

        unique case (state)
          D_IDLE: if (rx_rise) begin
            state <= D_HUNT;
            win   <= '0;
            nhunt <= '0;
          end
          D_HUNT: if (sample) begin
            if ({win[6:0], rx_s} == id && nhunt >= 7) begin
              state <= D_PAYLOAD;
              nbits <= '0;
            end else if (nhunt == MAX_HUNT[$bits(nhunt)-1:0] - 1'b1) begin
              state <= D_IDLE;
            end
            win   <= {win[6:0], rx_s};
            nhunt <= nhunt + 1'b1;
          end
          D_PAYLOAD: if (sample) begin
            shreg <= {shreg[30:0], rx_s};
            nbits <= nbits + 1'b1;
            if (nbits == 6'd31) begin
              payload <= {shreg[30:0], rx_s};
              irq     <= 1'b1;
              state   <= D_IDLE;
            end
          end
          default: state <= D_IDLE;
        endcase
      end
    end
  end

endmodule
