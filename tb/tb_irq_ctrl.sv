// tb_irq_ctrl: checks cause set, write-1-to-clear, masking and the priority
// of a new request over a simultaneous clear.
//
// For 500 cycles the queue requests, the clear strobe with its bit pattern
// and the mask are random; a model of the cause register (set by requests,
// cleared by written ones, a request winning over a clear of the same bit)
// predicts the cause and the irq line. Inputs change at the rising edge and
// are sampled at the next one; cause and irq are compared just after it.
//
// One interrupt line follows the source design; the cause/mask/clear scheme
// under test is this design's choice.
module tb_irq_ctrl;
  localparam int Q = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [Q-1:0] fire, mask, clr, cause;
  logic clr_we, irq;

  irq_ctrl #(.NUM_QUEUES(Q)) dut (.*);

  int checks = 0, failures = 0;
  logic [Q-1:0] m;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fire = 0; mask = 0; clr = 0; clr_we = 0; m = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      logic [Q-1:0] f, c, mk;
      bit cw;
      f = Q'($urandom); c = Q'($urandom); mk = Q'($urandom); cw = 1'($urandom);
      fire <= f; clr <= c; clr_we <= cw; mask <= mk;
      @(posedge clk);
      m = (m & ~(cw ? c : '0)) | f;
      #1; checks++;
      if (cause != m || irq != |(m & mk)) begin
        failures++; $display("FAIL: cause %b expected %b irq %b", cause, m, irq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
