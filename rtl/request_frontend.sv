// request_frontend: the controller's application-facing input logic. It runs
// independently of the agreement logic: it accepts application requests into a
// small FIFO while the controller is busy with earlier rounds, so a flooding
// application cannot stall the replies of others. It accepts nothing while the
// controller status is Loading (`accept_en` low). Requests that break the rate
// rules are taken off the bus but ignored, with a one-cycle `dropped` pulse:
//   - less than `min_gap` cycles after the previous accepted request, or
//   - more than `win_max` accepted requests in the current window of `win_len`
//     cycles (win_max = 0 disables this rule).
// Interface: valid/ready on both sides; `q_pop` takes the head of the FIFO.
// Timing: a request appears at q_valid one cycle after its handshake.
// Queueing and the two rate rules are what the platform describes; the FIFO
// depth and counter widths are this design's choices.
module request_frontend #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned DW    = 256,
  parameter int unsigned CW    = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          accept_en,
  input  logic [CW-1:0] min_gap,
  input  logic [CW-1:0] win_len,
  input  logic [CW-1:0] win_max,
  input  logic          app_valid,
  output logic          app_ready,
  input  logic [DW-1:0] app_data,
  output logic          dropped,
  output logic          q_valid,
  output logic [DW-1:0] q_data,
  input  logic          q_pop
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [DW-1:0] fifo [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic [CW-1:0] gap_cnt, win_cnt, win_acc;
  logic          any_accepted;

  logic hs, too_soon, too_many, push, pop;
  assign app_ready = accept_en && (32'(count) < DEPTH);
  assign hs        = app_valid && app_ready;
  assign too_soon  = any_accepted && (gap_cnt < min_gap);
  assign too_many  = (win_max != '0) && (win_acc >= win_max);
  assign push      = hs && !too_soon && !too_many;
  assign pop       = q_pop && q_valid;
  assign q_valid   = (count != '0);
  assign q_data    = fifo[rd_ptr];

  function automatic logic [PW-1:0] incp(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= app_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      gap_cnt <= '0; win_cnt <= '0; win_acc <= '0;
      any_accepted <= 1'b0;
      dropped <= 1'b0;
    end else begin
      dropped <= hs && !push;
      if (push) wr_ptr <= incp(wr_ptr);
      if (pop)  rd_ptr <= incp(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      // gap since the last accepted request (saturating)
      if (push) begin
        gap_cnt      <= CW'(1);
        any_accepted <= 1'b1;
      end else if (gap_cnt != '1) begin
        gap_cnt <= gap_cnt + CW'(1);
      end
      // fixed window
      if (win_cnt + CW'(1) >= win_len) begin
        win_cnt <= '0;
        win_acc <= '0;
      end else begin
        win_cnt <= win_cnt + CW'(1);
        if (push) win_acc <= win_acc + CW'(1);
      end
    end
  end

  // The FIFO never overflows or underflows.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> 32'(count) < DEPTH || pop);
endmodule
