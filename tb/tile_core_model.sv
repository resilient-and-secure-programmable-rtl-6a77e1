// tile_core_model: behavioural model of a tile's compute core (the accelerator
// or softcore a tile carries). Not synthesizable logic. It answers each
// `start` after LATENCY cycles with ref_op(req), the reference operation of the
// testbenches: the request rotated left by one bit and XORed with a constant.
// Fault knobs: kind 1 returns a wrong reply (one bit flipped, Byzantine tile),
// kind 2 never answers (crashed or hung tile), kind 3 answers after SLOW cycles.
module tile_core_model #(
  parameter int LATENCY = 10,
  parameter int SLOW    = 100000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] req,
  output logic         done,
  output logic [255:0] rep,
  input  int           fault_kind,
  input  logic [255:0] flip
);
  int cnt;
  logic [255:0] hold;

  function automatic logic [255:0] ref_op(input logic [255:0] r);
    return {r[254:0], r[255]} ^ {8{32'h5a5a_c3c3}};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; rep <= '0; cnt <= 0; hold <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        hold <= req;
        cnt  <= (fault_kind == 2) ? -1 : (fault_kind == 3) ? SLOW : LATENCY;
      end else if (cnt > 0) begin
        cnt <= cnt - 1;
        if (cnt == 1) begin
          done <= 1'b1;
          rep  <= (fault_kind == 1) ? ref_op(hold) ^ flip : ref_op(hold);
        end
      end
    end
  end
endmodule
