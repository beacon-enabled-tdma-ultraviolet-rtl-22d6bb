// tx_fifo: synchronous first-word-fall-through byte FIFO.
//
// Holds the bytes received from the host until the node's own information
// slots come round. The paper does not describe this buffer; a node can only
// send in its own U_ij slots, so the UART bytes have to wait somewhere. The
// depth (default 32768 bytes) is this design's choice: it holds the 0.75 s
// of host data that arrive between a node's slot groups at the paper's
// 800 kbit/s network throughput (200 kbit/s per node).
//
// rd_data_o always shows the oldest byte when count_o > 0; rd_en_i removes
// it at the clock edge. A write to a full FIFO is dropped and counted in
// overflow_o (saturating). Reading an empty FIFO is ignored. The storage is
// a plain array with one write and one read port, so it maps to block RAM;
// the read is asynchronous from the array, a choice that keeps the
// fall-through timing simple.
module tx_fifo #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned WIDTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [WIDTH-1:0]           wr_data_i,
  input  logic                       wr_en_i,
  output logic [WIDTH-1:0]           rd_data_o,
  input  logic                       rd_en_i,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic [15:0]                overflow_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign do_rd     = rd_en_i && (count_o != 0);
  assign do_wr     = wr_en_i && (count_o != CW'(DEPTH) || do_rd);
  assign rd_data_o = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count_o    <= '0;
      overflow_o <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count_o <= count_o + CW'(do_wr) - CW'(do_rd);
      if (wr_en_i && !do_wr && overflow_o != 16'hFFFF)
        overflow_o <= overflow_o + 1'b1;
    end
  end

  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    count_o <= CW'(DEPTH));
endmodule
