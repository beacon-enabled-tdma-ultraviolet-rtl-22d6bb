// peak_detect: finds the maximum of a correlation stream above a threshold.
//
// The paper takes the position of the largest correlation peak as the start
// (here: the end) of the received sequence. This helper watches one
// correlation value per chip (upd_i). When a value exceeds thresh_i it starts
// tracking the running maximum; every larger value restarts the count of
// chips since the maximum. When WIN chips have passed without a larger value
// the peak is declared: found_o pulses for one clock and tag_o holds the
// tag_i value that came with the maximum. The declaration therefore always
// follows the peak by exactly WIN chips, a fixed processing delay that the
// time compensation can absorb. With en_i low the detector is idle and
// forgets any peak in progress.
module peak_detect #(
  parameter int unsigned CW    = 17,
  parameter int unsigned TAG_W = 1,
  parameter int unsigned WIN   = 9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_i,
  input  logic                 upd_i,
  input  logic signed [CW-1:0] corr_i,
  input  logic signed [CW-1:0] thresh_i,
  input  logic [TAG_W-1:0]     tag_i,
  output logic                 found_o,
  output logic [TAG_W-1:0]     tag_o
);
  localparam int unsigned AW = $clog2(WIN + 1);

  logic                 tracking;
  logic signed [CW-1:0] max_q;
  logic [AW-1:0]        age;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tracking <= 1'b0;
      max_q    <= '0;
      age      <= '0;
      tag_o    <= '0;
      found_o  <= 1'b0;
    end else begin
      found_o <= 1'b0;
      if (!en_i) begin
        tracking <= 1'b0;
      end else if (upd_i) begin
        if ((!tracking && corr_i > thresh_i) || (tracking && corr_i > max_q)) begin
          tracking <= 1'b1;
          max_q    <= corr_i;
          tag_o    <= tag_i;
          age      <= '0;
        end else if (tracking) begin
          if (age == AW'(WIN - 1)) begin
            tracking <= 1'b0;
            found_o  <= 1'b1;
          end
          age <= age + 1'b1;
        end
      end
    end
  end
endmodule
