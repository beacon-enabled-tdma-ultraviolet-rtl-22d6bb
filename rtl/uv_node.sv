// uv_node: digital part of one node of the beacon-enabled TDMA UV network.
//
// One FPGA design serves every node; node_id_i selects the role. Node 1 is
// the master: it transmits the beacon at the start of each period T and
// keeps the reference time counter. Nodes 2..N are slaves: they find the
// beacon by correlation, load their time counter with the compensation
// value c_initial, and from then on follow the same slot schedule. Every
// node sends frames of host data in its own slots U_ij and receives the
// frames that other nodes send to it.
//
//   uart_rx -> tx_fifo -> info_tx --+--> led_o (OOK drive of the UV LED)
//   slot_ctrl -> beacon_gen --------+
//   adc_i (K PMTs) -> photon_counter -> beacon_rx -> slot_ctrl
//                                    -> info_rx   -> bytes, frame counters
//
// Defaults follow the paper's main configuration: N = 4 nodes, K = 3 PMTs,
// L = 256 beacon symbols, M = 10 chips per symbol, 2 Msymbol/s, T = 1 s,
// slot lengths of Table I and c_initial = 133 us. The 100 MHz clock
// (SYM_CLKS = 50, CLKS_PER_CHIP = 5), the UART rate, the FIFO size and the
// frame layout are this design's choices.
//
// Interface: the node drives led_o (LED on for a 1 symbol), reads K ADC
// sample streams of the PMT pulses, and talks to the host by uart_rxd_i.
// Received payload bytes come out on rx_byte_o/rx_byte_valid_o. The
// correlation thresholds and the ADC pulse threshold are inputs so they can
// be set for the link at hand. sync_pulse_o is the pulse of the paper's
// synchronization test: at the master it marks the beacon start, at a slave
// the beacon detection. period_pulse_o marks C = 0 on every node; after
// compensation the pulses of all nodes line up.
//
// The node looks for frames only in the information and guard slots and
// not while its own LED is lit (half duplex); a slave only transmits once it
// has received a beacon.
module uv_node
  import uv_pkg::*;
#(
  parameter int unsigned N             = 4,
  parameter int unsigned K             = 3,
  parameter int unsigned ADC_W         = 12,
  parameter int unsigned L             = 256,
  parameter int unsigned M             = 10,
  parameter int unsigned CLKS_PER_CHIP = 5,
  parameter int unsigned CNT_W         = 4,
  parameter int unsigned BI_SYMS       = 256,
  parameter int unsigned U_SYMS        = 137500,
  parameter int unsigned G_SYMS        = 29124,
  parameter int unsigned C_INIT        = 13300,
  parameter int unsigned PAYLOAD_BYTES = 32,
  parameter int unsigned FIFO_DEPTH    = 32768,
  parameter int unsigned CLKS_PER_BIT  = 25,
  localparam int unsigned SYM_CLKS     = M * CLKS_PER_CHIP,
  localparam int unsigned IW           = $clog2(N + 1),
  localparam int unsigned SW           = CNT_W + $clog2(M + 1),
  localparam int unsigned BTW          = SW + $clog2(L + 1),
  localparam int unsigned FTW          = SW + $clog2(PRE_LEN + 1),
  localparam int unsigned C_MAX        = (L + BI_SYMS + N * (N - 1) * (U_SYMS + G_SYMS)) * SYM_CLKS,
  localparam int unsigned CW           = $clog2(C_MAX + 1),
  localparam int unsigned FCW          = $clog2(FIFO_DEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [IW-1:0]           node_id_i,
  input  logic                    uart_rxd_i,
  input  logic [K-1:0][ADC_W-1:0] adc_i,
  input  logic [ADC_W-1:0]        adc_thresh_i,
  input  logic signed [BTW:0]     beacon_thresh_i,
  input  logic signed [FTW:0]     frame_thresh_i,
  output logic                    led_o,
  output logic                    sync_pulse_o,
  output logic signed [BTW:0]     beacon_peak_o,
  output logic                    period_pulse_o,
  output logic [CW-1:0]           cnt_o,
  output slot_t                   slot_o,
  output logic [IW-1:0]           slot_src_o,
  output logic [IW-1:0]           slot_dst_o,
  output logic                    synced_o,
  output logic [7:0]              rx_byte_o,
  output logic                    rx_byte_valid_o,
  output logic                    rx_byte_mine_o,
  output logic                    rx_frame_done_o,
  output logic                    rx_frame_ok_o,
  output logic [3:0]              rx_frame_src_o,
  output logic [24:0]             frame_rx_num_o,
  output logic [24:0]             frame_ok_num_o,
  output logic [24:0]             frames_sent_o,
  output logic [15:0]             fifo_overflow_o,
  output logic                    uart_err_o
);
  logic             is_master;
  logic [7:0]       uart_byte, fifo_data;
  logic             uart_valid, fifo_pop;
  logic [FCW-1:0]   fifo_count;
  logic             chip_valid;
  logic [CNT_W-1:0] chip_cnt;
  logic             beacon_sync, beacon_start, beacon_bit, beacon_active;
  logic             tx_bit, tx_active, slot_start, rx_window;
  logic [CW-1:0]    remaining;

  assign is_master = (node_id_i == IW'(1));

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rxd(uart_rxd_i), .data_o(uart_byte), .valid_o(uart_valid),
    .frame_err_o(uart_err_o)
  );

  tx_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(8)) u_fifo (
    .clk, .rst_n, .wr_data_i(uart_byte), .wr_en_i(uart_valid),
    .rd_data_o(fifo_data), .rd_en_i(fifo_pop), .count_o(fifo_count),
    .overflow_o(fifo_overflow_o)
  );

  slot_ctrl #(
    .N(N), .SYM_CLKS(SYM_CLKS), .BT_SYMS(L), .BI_SYMS(BI_SYMS),
    .U_SYMS(U_SYMS), .G_SYMS(G_SYMS), .C_INIT(C_INIT)
  ) u_slot (
    .clk, .rst_n, .is_master_i(is_master), .sync_i(beacon_sync),
    .cnt_o, .slot_o, .slot_i_o(slot_src_o), .slot_j_o(slot_dst_o),
    .slot_start_o(slot_start), .remaining_o(remaining), .period_o(period_pulse_o),
    .synced_o
  );

  assign beacon_start = is_master && slot_start && slot_o == SLOT_BT;

  beacon_gen #(.L(L), .SYM_CLKS(SYM_CLKS)) u_bgen (
    .clk, .rst_n, .start_i(beacon_start), .bit_o(beacon_bit), .active_o(beacon_active)
  );

  info_tx #(
    .N(N), .SYM_CLKS(SYM_CLKS), .PAYLOAD_BYTES(PAYLOAD_BYTES), .CW(CW), .FIFO_CW(FCW)
  ) u_tx (
    .clk, .rst_n, .node_id_i, .synced_i(synced_o), .slot_i(slot_o),
    .slot_src_i(slot_src_o), .slot_dst_i(slot_dst_o), .remaining_i(remaining),
    .fifo_data_i(fifo_data), .fifo_count_i(fifo_count), .fifo_pop_o(fifo_pop),
    .bit_o(tx_bit), .active_o(tx_active), .frames_o(frames_sent_o)
  );

  assign led_o = beacon_bit | tx_bit;

  photon_counter #(.K(K), .ADC_W(ADC_W), .CLKS_PER_CHIP(CLKS_PER_CHIP), .CNT_W(CNT_W)) u_pc (
    .clk, .rst_n, .adc_i, .thresh_i(adc_thresh_i),
    .chip_valid_o(chip_valid), .chip_cnt_o(chip_cnt)
  );

  beacon_rx #(.L(L), .M(M), .CNT_W(CNT_W)) u_brx (
    .clk, .rst_n, .en_i(!is_master), .chip_valid_i(chip_valid), .chip_cnt_i(chip_cnt),
    .thresh_i(beacon_thresh_i), .sync_o(beacon_sync), .peak_o(beacon_peak_o)
  );

  assign sync_pulse_o = is_master ? beacon_start : beacon_sync;

  // Frames are only sent in information slots, so the receiver searches for
  // them only there: not in BT or BI, not in the last guard interval (where
  // a slave waits for the beacon) and not while this node transmits.
  assign rx_window = !tx_active &&
                     (slot_o == SLOT_U ||
                      (slot_o == SLOT_G && !(slot_src_o == IW'(N) && slot_dst_o == IW'(N - 1))));

  info_rx #(.N(N), .M(M), .CNT_W(CNT_W), .PAYLOAD_BYTES(PAYLOAD_BYTES)) u_irx (
    .clk, .rst_n, .en_i(rx_window), .node_id_i,
    .chip_valid_i(chip_valid), .chip_cnt_i(chip_cnt), .thresh_i(frame_thresh_i),
    .byte_o(rx_byte_o), .byte_valid_o(rx_byte_valid_o), .byte_mine_o(rx_byte_mine_o),
    .frame_done_o(rx_frame_done_o), .frame_ok_o(rx_frame_ok_o), .frame_src_o(rx_frame_src_o),
    .frame_rx_num_o, .frame_ok_num_o
  );
endmodule
