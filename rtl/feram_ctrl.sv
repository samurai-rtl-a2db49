// feram_ctrl: FeRAM controller and SPI master of the NVM controller.
//
// Serves two requesters on the OD clock: instruction-line refills from the
// instruction cache (`i_*`, one 256-bit line of 8 words) and RISC-V data
// accesses (`d_*`, one 32-bit word, read or write). When both ask at once
// the one that was not served last goes first. Each access is one SPI frame
// on a single data line: chip select low, a 24-bit control word, then the
// payload (256 bits for a line, 32 for a word), chip select high for
// CS_GAP cycles. So a line refill carries 256 payload bits in 280, the 91%
// link efficiency the paper quotes for its 24-bit control and 256-bit
// payload. The control word, MSB first, is {cmd[4:0], byte_address[18:0]}
// with cmd 5'b00011 for read and 5'b00010 for write (the paper gives the
// length only; this encoding is this design's choice, the address field
// covering the 512 kB NVM). Payload is MSB first; a line arrives word 0
// first. SPI mode 0: MOSI changes while SCK is low, MISO is sampled on the
// rising edge. SCK runs at clk/(2*SCK_DIV). `i_done`/`d_done` pulse for one
// cycle with the data, CS_GAP + 2*SCK_DIV*280 + 2 cycles after a line request
// is taken (564 cycles at the defaults).
// The reset also appears in the `disable iff` of the assertions, which lint
// reports as a reset used both asynchronously and synchronously; the
// assertions are checks only and add no logic.
module feram_ctrl #(
  parameter int unsigned SCK_DIV    = 1,
  parameter int unsigned CS_GAP     = 2,
  parameter int unsigned LINE_WORDS = 8,
  localparam int unsigned CTRL_BITS = 24,
  localparam int unsigned LINE_BITS = 32 * LINE_WORDS,
  localparam int unsigned LAW       = 19 - $clog2(LINE_WORDS * 4)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction-line refill
  input  logic                 i_req,
  input  logic [LAW-1:0]       i_line,
  output logic                 i_done,
  output logic [LINE_BITS-1:0] i_data,
  // data access, word address
  input  logic                 d_req,
  input  logic                 d_we,
  input  logic [16:0]          d_addr,
  input  logic [31:0]          d_wdata,
  output logic                 d_done,
  output logic [31:0]          d_rdata,
  // SPI to the FeRAM
  output logic                 spi_csn,
  output logic                 spi_sck,
  output logic                 spi_mosi,
  input  logic                 spi_miso
);

  localparam logic [4:0] CMD_READ  = 5'b00011;
  localparam logic [4:0] CMD_WRITE = 5'b00010;
  localparam int unsigned FRAME    = CTRL_BITS + LINE_BITS;

  typedef enum logic [1:0] {F_IDLE, F_GAP, F_SHIFT, F_DONE} fstate_e;
  fstate_e state;

  logic                last_i;     // the instruction side was served last
  logic                cur_i;      // current frame is a line refill
  logic                cur_we;
  logic [FRAME-1:0]    tx;         // control + write payload, MSB first
  logic [LINE_BITS-1:0] rx;
  logic [$clog2(FRAME+1)-1:0] nbits, bitc;
  logic [$clog2(SCK_DIV+CS_GAP+1)-1:0] div;
  logic [31:0]         d_wdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= F_IDLE;
      last_i  <= 1'b0;
      cur_i   <= 1'b0;
      cur_we  <= 1'b0;
      tx      <= '0;
      rx      <= '0;
      nbits   <= '0;
      bitc    <= '0;
      div     <= '0;
      spi_csn <= 1'b1;
      spi_sck <= 1'b0;
      d_wdata_q <= '0;
    end else begin
      unique case (state)
        F_IDLE: if (i_req || d_req) begin
          // alternate on a tie
          if (i_req && (!d_req || !last_i)) begin
            cur_i  <= 1'b1;
            cur_we <= 1'b0;
            tx     <= {CMD_READ, i_line, {$clog2(LINE_WORDS * 4){1'b0}}, {LINE_BITS{1'b0}}};
            nbits  <= ($bits(nbits))'(CTRL_BITS + LINE_BITS);
          end else begin
            cur_i  <= 1'b0;
            cur_we <= d_we;
            tx     <= {d_we ? CMD_WRITE : CMD_READ, d_addr, 2'b00, d_wdata, {(LINE_BITS - 32){1'b0}}};
            nbits  <= ($bits(nbits))'(CTRL_BITS + 32);
          end
          d_wdata_q <= d_wdata;
          div   <= '0;
          state <= F_GAP;
        end
        F_GAP: begin
          // chip select high for CS_GAP cycles before the frame
          div <= div + 1'b1;
          if (div == ($bits(div))'(CS_GAP - 1)) begin
            spi_csn <= 1'b0;
            bitc    <= '0;
            div     <= '0;
            state   <= F_SHIFT;
          end
        end
        F_SHIFT: begin
          div <= div + 1'b1;
          if (div == ($bits(div))'(SCK_DIV - 1)) begin
            div     <= '0;
            spi_sck <= !spi_sck;
            if (!spi_sck) begin
              // rising edge: sample MISO during the payload
              if (bitc >= ($bits(bitc))'(CTRL_BITS)) rx <= {rx[LINE_BITS-2:0], spi_miso};
            end else begin
              // falling edge: next bit
              tx   <= tx << 1;
              bitc <= bitc + 1'b1;
              if (bitc + 1'b1 == nbits) begin
                spi_csn <= 1'b1;
                state   <= F_DONE;
              end
            end
          end
        end
        F_DONE: begin
          last_i <= cur_i;
          state  <= F_IDLE;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  assign spi_mosi = !spi_csn && tx[FRAME-1];
  assign i_done   = (state == F_DONE) && cur_i;
  assign d_done   = (state == F_DONE) && !cur_i;
  // the first word received (word 0) goes to the low end of the line
  always_comb begin
    for (int w = 0; w < LINE_WORDS; w++) i_data[32*w +: 32] = rx[LINE_BITS-1-32*w -: 32];
  end
  assign d_rdata  = cur_we ? d_wdata_q : rx[31:0];

  a_sck_idle_low: assert property (@(posedge clk) disable iff (!rst_n) spi_csn |-> !spi_sck);

endmodule
