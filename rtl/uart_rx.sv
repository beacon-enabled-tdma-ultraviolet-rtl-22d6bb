// uart_rx: 8N1 UART receiver for the byte stream from the host PC.
//
// The host sends the information bits in groups of 8 over a UART, as the
// paper describes; baud rate and frame format are not given there, so this
// receiver uses 8 data bits, LSB first, no parity, one stop bit, at
// CLKS_PER_BIT system clocks per bit (default 25, i.e. 4 Mbaud at 100 MHz,
// fast enough to feed the node's share of the 800 kbit/s network
// throughput).
//
// The line is first passed through a two-flop synchronizer. A falling edge
// starts a frame; the start bit is checked at its middle, then each data bit
// and the stop bit are sampled at their middles. A byte with a valid stop bit
// is presented on data_o with a one-clock valid_o pulse, one clock after the
// middle of the stop bit. A byte whose stop bit is 0 is dropped and flagged
// by frame_err_o for one clock; the receiver then waits for the line to
// return high before it looks for the next start bit.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 25
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data_o,
  output logic       valid_o,
  output logic       frame_err_o
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [2:0] {IDLE, START, DATA, STOP, BREAK} state_t;

  state_t        state;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [7:0]    shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync        <= 2'b11;
      state       <= IDLE;
      cnt         <= '0;
      bit_idx     <= '0;
      shreg       <= '0;
      data_o      <= '0;
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
    end else begin
      sync        <= {sync[0], rxd};
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
      unique case (state)
        IDLE: if (!sync[1]) begin
          state <= START;
          cnt   <= CW'(CLKS_PER_BIT / 2);
        end
        START: if (cnt == 0) begin
          if (!sync[1]) begin
            state   <= DATA;
            cnt     <= CW'(CLKS_PER_BIT - 1);
            bit_idx <= '0;
          end else begin
            state <= IDLE;           // glitch, not a start bit
          end
        end else cnt <= cnt - 1'b1;
        DATA: if (cnt == 0) begin
          shreg <= {sync[1], shreg[7:1]};
          cnt   <= CW'(CLKS_PER_BIT - 1);
          if (bit_idx == 3'd7) state <= STOP;
          bit_idx <= bit_idx + 1'b1;
        end else cnt <= cnt - 1'b1;
        STOP: if (cnt == 0) begin
          state <= IDLE;
          if (sync[1]) begin
            data_o  <= shreg;
            valid_o <= 1'b1;
          end else begin
            frame_err_o <= 1'b1;
            state       <= BREAK;
          end
        end else cnt <= cnt - 1'b1;
        BREAK: if (sync[1]) state <= IDLE;   // wait for the line to go idle
        default: state <= IDLE;
      endcase
    end
  end
endmodule
