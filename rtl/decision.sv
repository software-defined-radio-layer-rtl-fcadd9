// decision: PPM bit decision from the two chip correlations.
//
// At the end of each chip (done_tc) the correlation with the bit-1
// template is compared with the correlation with the bit-0 template; the
// larger one wins, and a tie decides 0. The bit is registered: bit_out and
// bit_valid follow done_tc by one cycle, bit_valid for one cycle only.
// Comparing the two correlations follows the design; the tie rule and the
// register are this design's own.
module decision
  import uwb_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    done_tc,
  input  logic signed [ACC_W-1:0] corr0,
  input  logic signed [ACC_W-1:0] corr1,
  output logic                    bit_out,
  output logic                    bit_valid
);

  always_ff @(posedge clk) begin
    if (rst) begin
      bit_out   <= 1'b0;
      bit_valid <= 1'b0;
    end else begin
      bit_valid <= done_tc;
      if (done_tc) bit_out <= corr1 > corr0;
    end
  end

endmodule
