// usec_tick: one-cycle pulse every microsecond, the time base of the
// moderation timers.
//
// A counter runs from 0 to CLK_MHZ-1 and pulses tick when it wraps, so tick
// is high for one clock in every CLK_MHZ. The first pulse after reset comes
// CLK_MHZ cycles later. The moderation timers in the source design are given
// in milliseconds and microseconds; counting microseconds, and deriving them
// from the receive clock whose frequency is a parameter, are this design's
// choices.
module usec_tick #(
  parameter int unsigned CLK_MHZ = 125
)(
  input  logic clk,
  input  logic rst_n,
  output logic tick
);

  localparam int unsigned W = (CLK_MHZ > 1) ? $clog2(CLK_MHZ) : 1;
  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else begin
      tick <= (32'(cnt) == CLK_MHZ - 1);
      cnt  <= (32'(cnt) == CLK_MHZ - 1) ? '0 : cnt + 1'b1;
    end
  end

endmodule
