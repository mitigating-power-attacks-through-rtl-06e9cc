// delay_ctrl: delay controller of one issue-queue slot.
//
// When a micro-op is written into the slot (load) the controller keeps the delay the
// Slack Unit returned for it. Nothing happens while the micro-op still waits for
// operands; from the first cycle its operands are all ready (ops_ready) the counter
// counts down once per cycle, and can_issue rises when it reaches zero. A delay of D
// therefore holds the micro-op exactly D cycles beyond the cycle it would have become
// eligible, and a delay of 0 changes nothing. That the delay starts only after the
// operands are produced follows the design; the 5-bit counter matches the slack field.
module delay_ctrl #(
  parameter int DELAY_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [DELAY_W-1:0] delay_in,
  input  logic               ops_ready,
  output logic               can_issue
);
  logic [DELAY_W-1:0] remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          remaining <= '0;
    else if (load)                       remaining <= delay_in;
    else if (ops_ready && remaining != 0) remaining <= remaining - 1'b1;
  end

  assign can_issue = ops_ready && (remaining == '0);

endmodule
