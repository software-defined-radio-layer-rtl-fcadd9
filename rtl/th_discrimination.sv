// th_discrimination: time-hopping discrimination of the TH-PPM receiver.
//
// The decision block gives a bit for every chip, but in each frame of Nc
// chips only the chip named by the time-hopping code holds this link's
// pulse. This block counts chips inside the frame and passes on the
// decision of that chip only, so one data bit leaves per frame.
//
// The chip counter is cleared by the start mark of the synchroniser and
// steps on chip_end. The first frame after start is the preamble frame
// that carried the synchronisation pulse; it yields no bit. frame_end is
// high, combinationally, during the last sample of every frame, and
// code_step likewise for data frames only: it tells the TH-code
// management to move to the next code value. The chip's decision arrives
// two cycles after its chip_end (correlation then decision), so whether a
// chip is the coded one is worked out at chip_end, with the code value in
// force then, and carried two cycles along to meet its decision. rx_bit
// and rx_valid are registered and follow bit_valid by one cycle.
//
// TH discrimination with a TH-code input follows the design; the
// preamble frame and the pipeline alignment are this design's own.
module th_discrimination
  import uwb_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              chip_end,
  input  logic [NC_W-1:0]   nc,         // chips per frame
  input  logic [CODE_W-1:0] code,       // coded chip of the current frame
  input  logic              bit_in,     // per-chip decision
  input  logic              bit_valid,
  output logic [NC_W-1:0]   chip_cnt,   // chip index inside the frame
  output logic              preamble,
  output logic              frame_end,
  output logic              code_step,
  output logic              rx_bit,
  output logic              rx_valid
);

  localparam int DEC_LAT = 2;  // chip_end to bit_valid, in cycles

  logic               hit;
  logic [DEC_LAT-1:0] hit_d;

  assign frame_end = chip_end && chip_cnt == nc - 1'b1;
  assign code_step = frame_end && !preamble;
  assign hit       = chip_end && !preamble && NC_W'(code) == chip_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      chip_cnt <= '0;
      preamble <= 1'b1;
      hit_d    <= '0;
      rx_bit   <= 1'b0;
      rx_valid <= 1'b0;
    end else begin
      hit_d    <= {hit_d[DEC_LAT-2:0], hit};
      rx_valid <= bit_valid && hit_d[DEC_LAT-1];
      if (bit_valid) rx_bit <= bit_in;
      if (start) begin
        chip_cnt <= '0;
        preamble <= 1'b1;
      end else if (chip_end) begin
        chip_cnt <= frame_end ? '0 : chip_cnt + 1'b1;
        if (frame_end) preamble <= 1'b0;
      end
    end
  end

endmodule
