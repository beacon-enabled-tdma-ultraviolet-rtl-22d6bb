// info_tx: information transmission in the node's own TDMA slots.
//
// During every slot U_ij with i equal to this node's id the transmitter
// sends frames to node j, back to back, as long as the host FIFO holds a
// full payload and the rest of the slot can take a whole frame. Each symbol
// is OOK: bit_o (the LED drive) is high for all SYM_CLKS clocks of a 1.
//
// Frame layout (this design's choice; the paper does not give one):
//   63-symbol preamble (m-sequence of uv_pkg, for frame synchronization and
//     channel estimation at the receiver)
//   16-bit header: source id [15:12], destination id [11:8], sequence [7:0]
//   PAYLOAD_BYTES bytes from the FIFO, each MSB first
//   CRC-16-CCITT (init 0xFFFF) over header and payload, MSB first
// A frame therefore lasts FRAME_SYMS = 63 + 16 + 8*PAYLOAD_BYTES + 16
// symbols.
//
// Timing: a frame starts the clock after the start condition holds; each
// symbol lasts SYM_CLKS clocks; a payload byte is popped from the FIFO in
// the clock its first bit starts. frames_o counts completed frames.
module info_tx
  import uv_pkg::*;
#(
  parameter int unsigned N             = 4,
  parameter int unsigned SYM_CLKS      = 50,
  parameter int unsigned PAYLOAD_BYTES = 32,
  parameter int unsigned CW            = 27,
  parameter int unsigned FIFO_CW       = 16,
  localparam int unsigned IW           = $clog2(N + 1),
  localparam int unsigned FRAME_SYMS   = PRE_LEN + HDR_BITS + 8 * PAYLOAD_BYTES + CRC_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [IW-1:0]      node_id_i,
  input  logic               synced_i,
  input  slot_t              slot_i,
  input  logic [IW-1:0]      slot_src_i,
  input  logic [IW-1:0]      slot_dst_i,
  input  logic [CW-1:0]      remaining_i,
  input  logic [7:0]         fifo_data_i,
  input  logic [FIFO_CW-1:0] fifo_count_i,
  output logic               fifo_pop_o,
  output logic               bit_o,
  output logic               active_o,
  output logic [24:0]        frames_o
);
  localparam logic [PRE_LEN-1:0] PRE_SEQ    = preamble_seq();
  localparam longint unsigned    FRAME_CLKS = longint'(FRAME_SYMS) * SYM_CLKS;
  localparam int unsigned        PW         = $clog2(SYM_CLKS);
  localparam int unsigned        NW         = $clog2(8 * PAYLOAD_BYTES + PRE_LEN + 1);

  typedef enum logic [1:0] {F_PRE, F_HDR, F_PAY, F_CRC} field_t;

  field_t        field;
  logic [PW-1:0] phase;
  logic [NW-1:0] cnt;
  logic [15:0]   sh, crc;
  logic [7:0]    seq;
  logic          cur, start, sym_end;

  assign start = !active_o && synced_i && slot_i == SLOT_U && slot_src_i == node_id_i &&
                 fifo_count_i >= FIFO_CW'(PAYLOAD_BYTES) &&
                 longint'(remaining_i) > FRAME_CLKS;
  assign sym_end = active_o && phase == PW'(SYM_CLKS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_o <= 1'b0;
      field    <= F_PRE;
      phase    <= '0;
      cnt      <= '0;
      sh       <= '0;
      crc      <= '1;
      seq      <= '0;
      cur      <= 1'b0;
      frames_o <= '0;
    end else if (start) begin
      active_o <= 1'b1;
      field    <= F_PRE;
      phase    <= '0;
      cnt      <= '0;
      cur      <= PRE_SEQ[0];
      sh       <= {4'(node_id_i), 4'(slot_dst_i), seq};
      crc      <= '1;
      seq      <= seq + 1'b1;
    end else if (active_o) begin
      phase <= sym_end ? '0 : phase + 1'b1;
      if (sym_end) begin
        unique case (field)
          F_PRE: if (cnt == NW'(PRE_LEN - 1)) begin
            field <= F_HDR;
            cnt   <= '0;
            cur   <= sh[15];
            crc   <= crc16_bit(crc, sh[15]);
            sh    <= {sh[14:0], 1'b0};
          end else begin
            cnt <= cnt + 1'b1;
            cur <= PRE_SEQ[$clog2(PRE_LEN)'(cnt + 1'b1)];
          end
          F_HDR: if (cnt == NW'(HDR_BITS - 1)) begin
            field <= F_PAY;
            cnt   <= '0;
            cur   <= fifo_data_i[7];
            crc   <= crc16_bit(crc, fifo_data_i[7]);
            sh    <= {fifo_data_i[6:0], 9'b0};
          end else begin
            cnt <= cnt + 1'b1;
            cur <= sh[15];
            crc <= crc16_bit(crc, sh[15]);
            sh  <= {sh[14:0], 1'b0};
          end
          F_PAY: if (cnt == NW'(8 * PAYLOAD_BYTES - 1)) begin
            field <= F_CRC;
            cnt   <= '0;
            cur   <= crc[15];
            sh    <= {crc[14:0], 1'b0};
          end else if (cnt[2:0] == 3'd7) begin
            cnt <= cnt + 1'b1;
            cur <= fifo_data_i[7];
            crc <= crc16_bit(crc, fifo_data_i[7]);
            sh  <= {fifo_data_i[6:0], 9'b0};
          end else begin
            cnt <= cnt + 1'b1;
            cur <= sh[15];
            crc <= crc16_bit(crc, sh[15]);
            sh  <= {sh[14:0], 1'b0};
          end
          F_CRC: if (cnt == NW'(CRC_BITS - 1)) begin
            active_o <= 1'b0;
            cur      <= 1'b0;
            frames_o <= frames_o + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
            cur <= sh[15];
            sh  <= {sh[14:0], 1'b0};
          end
          default: active_o <= 1'b0;
        endcase
      end
    end
  end

  // A byte leaves the FIFO when its first bit goes out.
  assign fifo_pop_o = sym_end &&
                      ((field == F_HDR && cnt == NW'(HDR_BITS - 1)) ||
                       (field == F_PAY && cnt[2:0] == 3'd7 && cnt != NW'(8 * PAYLOAD_BYTES - 1)));
  assign bit_o = active_o && cur;

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_pop_o |-> fifo_count_i != 0);
endmodule
