// info_rx: information reception - frame synchronization, channel
// estimation, symbol detection and frame checking.
//
// The chip counts are correlated with the 63-symbol frame preamble
// (seq_correlator). A correlation peak above thresh_i (peak_detect, fixed
// WIN-chip delay) marks the end of a preamble, and thereby the symbol grid
// of the frame to one chip.
//
// Channel estimation: at the peak, the correlator's windows hold the
// preamble. The photon counts in its n1 one-symbols (sum1) and n0
// zero-symbols (sum0) estimate the per-symbol means lambda_s + lambda_b and
// lambda_b of the Poisson model. Each later symbol count S is detected as
// a 1 when it is at least the midpoint of the two means,
//   2 * n1 * n0 * S >= n0 * sum1 + n1 * sum0,
// computed without division. (The paper names channel estimation and symbol
// detection but not their method; the midpoint rule is this design's
// choice.)
//
// Symbol detection: the count of symbol n after the preamble is the
// correlator's newest window (s0) at the chip P + (n+1)M, P being the peak
// chip. The receiver then collects the 16-bit header, PAYLOAD_BYTES bytes
// and the 16-bit CRC of the frame layout of info_tx. Payload bytes leave on
// byte_o with a one-clock byte_valid_o (also for frames to other nodes;
// byte_mine_o tells whether the frame is addressed to this node). At the
// end of a frame addressed to node_id_i, frame_rx_num_o counts it and, if
// the CRC matches, frame_ok_num_o too (the 25-bit Frame_receive_Num and
// Frame_Correct_Num counters of the paper's test figures). frame_done_o
// pulses at the end of every frame, with frame_ok_o and frame_src_o valid.
// en_i low (for example while the node itself transmits) stops the search
// for new frames.
module info_rx
  import uv_pkg::*;
#(
  parameter int unsigned N             = 4,
  parameter int unsigned M             = 10,
  parameter int unsigned CNT_W         = 4,
  parameter int unsigned PAYLOAD_BYTES = 32,
  parameter int unsigned WIN           = M - 1,
  localparam int unsigned IW           = $clog2(N + 1),
  localparam int unsigned SW           = CNT_W + $clog2(M + 1),
  localparam int unsigned TW           = SW + $clog2(PRE_LEN + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en_i,
  input  logic [IW-1:0]       node_id_i,
  input  logic                chip_valid_i,
  input  logic [CNT_W-1:0]    chip_cnt_i,
  input  logic signed [TW:0]  thresh_i,
  output logic [7:0]          byte_o,
  output logic                byte_valid_o,
  output logic                byte_mine_o,
  output logic                frame_done_o,
  output logic                frame_ok_o,
  output logic [3:0]          frame_src_o,
  output logic [24:0]         frame_rx_num_o,
  output logic [24:0]         frame_ok_num_o
);
  localparam logic [PRE_LEN-1:0] PRE_SEQ  = preamble_seq();
  localparam int unsigned        N1       = $countones(PRE_SEQ);
  localparam int unsigned        N0       = PRE_LEN - N1;
  localparam int unsigned        NBITS    = HDR_BITS + 8 * PAYLOAD_BYTES + CRC_BITS;
  localparam int unsigned        BW       = $clog2(NBITS + 1);
  localparam int unsigned        MW       = $clog2(M + 1);
  localparam int unsigned        PW       = 2 * TW + 16;

  logic               upd, found, busy, bit_now, take;
  logic signed [TW:0] corr;
  logic [TW-1:0]      sum1, sum_all;
  logic [SW-1:0]      s0;
  logic [2*TW-1:0]    tag;
  logic [PW-1:0]      rhs, lhs;
  logic [MW-1:0]      chips;
  logic [BW-1:0]      nbit;
  logic [15:0]        hdr, crc;
  logic [14:0]        rx_crc;    // first 15 received CRC bits
  logic [6:0]         byte_sh;   // first 7 bits of the current byte

  seq_correlator #(.SEQ_LEN(PRE_LEN), .M(M), .CNT_W(CNT_W), .SEQ(PRE_SEQ)) u_corr (
    .clk, .rst_n, .chip_valid_i, .chip_cnt_i,
    .upd_o(upd), .corr_o(corr), .sum1_o(sum1), .sum_all_o(sum_all), .s0_o(s0)
  );

  peak_detect #(.CW(TW + 1), .TAG_W(2 * TW), .WIN(WIN)) u_peak (
    .clk, .rst_n, .en_i(en_i && !busy), .upd_i(upd), .corr_i(corr),
    .thresh_i, .tag_i({sum1, sum_all}), .found_o(found), .tag_o(tag)
  );

  // Detection threshold from the channel estimate, held for the frame.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rhs <= '0;
    else if (found)
      rhs <= PW'(N0) * PW'(tag[2*TW-1:TW]) + PW'(N1) * (PW'(tag[TW-1:0]) - PW'(tag[2*TW-1:TW]));
  end
  assign lhs     = PW'(2 * N1 * N0) * PW'(s0);
  assign bit_now = (lhs >= rhs);
  assign take    = busy && upd && (chips == MW'(M - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      chips          <= '0;
      nbit           <= '0;
      hdr            <= '0;
      crc            <= '1;
      rx_crc         <= '0;
      byte_sh        <= '0;
      byte_o         <= '0;
      byte_valid_o   <= 1'b0;
      frame_done_o   <= 1'b0;
      frame_ok_o     <= 1'b0;
      frame_src_o    <= '0;
      frame_rx_num_o <= '0;
      frame_ok_num_o <= '0;
    end else begin
      byte_valid_o <= 1'b0;
      frame_done_o <= 1'b0;
      if (found) begin
        busy  <= 1'b1;
        chips <= MW'(WIN);     // the peak is WIN chips old
        nbit  <= '0;
        crc   <= '1;
      end else if (busy && upd) begin
        chips <= take ? '0 : chips + 1'b1;
        if (take) begin
          nbit <= nbit + 1'b1;
          if (nbit < BW'(HDR_BITS)) begin
            hdr <= {hdr[14:0], bit_now};
            crc <= crc16_bit(crc, bit_now);
          end else if (nbit < BW'(HDR_BITS + 8 * PAYLOAD_BYTES)) begin
            byte_sh <= {byte_sh[5:0], bit_now};
            crc     <= crc16_bit(crc, bit_now);
            if (nbit[2:0] == 3'(HDR_BITS + 7)) begin
              byte_o       <= {byte_sh, bit_now};
              byte_valid_o <= 1'b1;
            end
          end else begin
            rx_crc <= {rx_crc[13:0], bit_now};
            if (nbit == BW'(NBITS - 1)) begin
              busy         <= 1'b0;
              frame_done_o <= 1'b1;
              frame_ok_o   <= ({rx_crc, bit_now} == crc);
              frame_src_o  <= hdr[15:12];
              if (hdr[11:8] == 4'(node_id_i)) begin
                frame_rx_num_o <= frame_rx_num_o + 1'b1;
                if ({rx_crc, bit_now} == crc) frame_ok_num_o <= frame_ok_num_o + 1'b1;
              end
            end
          end
        end
      end
    end
  end

  assign byte_mine_o = (hdr[11:8] == 4'(node_id_i));
endmodule
