// irq_ctrl: collects the queues' interrupt requests into one CPU interrupt.
//
// Each request from a queue's moderator sets that queue's bit in the cause
// register; the host clears bits by writing ones. The interrupt line is high
// while any unmasked cause bit is set, so the driver learns from one read
// which queues to service. The single interrupt line follows the source
// design's block diagram; the cause/mask/clear scheme is this design's choice.
//
// Timing: cause updates on the edge after a request; irq follows from the
// registers without further delay. A request in the same cycle as a clear of
// the same bit wins.
module irq_ctrl #(
  parameter int unsigned NUM_QUEUES = 4
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUM_QUEUES-1:0] fire,
  input  logic [NUM_QUEUES-1:0] mask,
  input  logic                  clr_we,
  input  logic [NUM_QUEUES-1:0] clr,
  output logic [NUM_QUEUES-1:0] cause,
  output logic                  irq
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cause <= '0;
    else        cause <= (cause & ~(clr_we ? clr : '0)) | fire;
  end

  assign irq = |(cause & mask);

endmodule
