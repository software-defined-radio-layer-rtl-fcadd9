// th_code_mgmt: time-hopping code memory and its switch-over.
//
// The TH code is a sequence of CODE_LEN chip indices, one per frame,
// repeated. It is kept in a memory of two banks. The receiver reads the
// active bank: code is the value for the current frame, and step (one
// pulse per data frame) moves to the next entry, wrapping after
// CODE_LEN. Meanwhile the MAC layer writes a new code into the other
// bank: load_restart points the writer at entry 0, then each load writes
// load_code to the next entry. complete is high once all CODE_LEN entries
// of the new code are in. The switch itself waits for apply, which the
// reconfiguration registers raise at a frame boundary: if the new code is
// complete the banks swap and the receiver starts the new code at entry 0
// in the next frame; otherwise apply leaves the code as it is.
// start (synchronisation) restarts the active code at entry 0.
//
// Timing: code is combinational from the registered index and bank;
// load, step, apply and start take effect at the next clock edge.
// Reset leaves an all-zero code in the active bank (pulse in chip 0 of
// every frame) and an empty new code.
//
// Keeping TH codes in memory and changing them at the right time follows
// the design; the two banks, the load protocol, the code length and the
// reset code are this design's own.
module th_code_mgmt
  import uwb_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              load_restart,
  input  logic              load,
  input  logic [CODE_W-1:0] load_code,
  input  logic              apply,
  input  logic              step,
  input  logic              start,
  output logic [CODE_W-1:0] code,
  output logic [$clog2(CODE_LEN)-1:0] code_idx,
  output logic              complete,
  output logic              swapped      // one cycle after a bank swap
);

  localparam int IW = $clog2(CODE_LEN);

  logic [CODE_W-1:0] mem [2][CODE_LEN];
  logic              act;               // active bank
  logic [IW:0]       wptr;              // next entry of the new code

  assign code     = mem[act][code_idx];
  assign complete = wptr == (IW+1)'(CODE_LEN);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < CODE_LEN; i++) mem[b][i] <= '0;
      act      <= 1'b0;
      wptr     <= '0;
      code_idx <= '0;
      swapped  <= 1'b0;
    end else begin
      swapped <= 1'b0;
      if (apply && complete) begin
        act      <= ~act;
        wptr     <= '0;
        code_idx <= '0;
        swapped  <= 1'b1;
      end else begin
        if (load_restart) begin
          wptr <= '0;
        end else if (load && !complete) begin
          mem[~act][wptr[IW-1:0]] <= load_code;
          wptr                    <= wptr + 1'b1;
        end
        if (start)
          code_idx <= '0;
        else if (step)
          code_idx <= (code_idx == IW'(CODE_LEN - 1)) ? '0 : code_idx + 1'b1;
      end
    end
  end

endmodule
