// hq_timer: the controller's timeout timer. `start` loads the limit and begins
// counting cycles; `expired` rises when `limit` cycles have passed since the
// start edge and stays high until the next `start` or `stop`. A limit of 0
// expires on the first cycle. The controller arms it while it waits for replies,
// for MP-Boot and for the tiles' Ready, so a slow or silent party cannot stall it.
// Timing: with start sampled at edge 0, `expired` is high after edge `limit`.
// That the controller times its waits for replies, Ready and MP-Boot is the
// platform's; counting in clock cycles and the sticky expired flag are this design's.
module hq_timer #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         stop,
  input  logic [W-1:0] limit,
  output logic         running,
  output logic         expired
);
  logic [W-1:0] remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      expired   <= 1'b0;
      remaining <= '0;
    end else if (start) begin
      running   <= (limit != '0);
      expired   <= (limit == '0);
      remaining <= (limit == '0) ? '0 : limit - W'(1);
    end else if (stop) begin
      running <= 1'b0;
      expired <= 1'b0;
    end else if (running) begin
      if (remaining == '0) begin
        running <= 1'b0;
        expired <= 1'b1;
      end else begin
        remaining <= remaining - W'(1);
      end
    end
  end
endmodule
