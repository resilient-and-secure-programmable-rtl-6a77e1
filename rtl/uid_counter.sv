// uid_counter: the monotonic sequence counter that gives every request its
// unique ID. It starts at 1 (0 marks an empty slot in the PL memories), steps by
// one on `inc`, and never wraps: at the largest value it stops and raises
// `exhausted`, because a repeated ID would let an old reply be accepted for a
// new request. It lives in the controller, outside the reconfigurable logic, so
// rejuvenation never resets it.
// Timing: `uid` changes on the clock edge that samples `inc`.
// A hardware counter for unique IDs is the platform's; the width, start value 1
// and saturation are this design's choices.
module uid_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inc,
  output logic [W-1:0] uid,
  output logic         exhausted
);
  assign exhausted = &uid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 uid <= W'(1);
    else if (inc && !exhausted) uid <= uid + W'(1);
  end
endmodule
