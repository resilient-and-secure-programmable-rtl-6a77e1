// checkpoint_sram: the on-chip SRAM, outside the programmable logic, that keeps
// the controller's checkpoint of its state (the State BRAM of PLM-C: next uid,
// slot, log count and history digest). Because it is not part of the PL, a
// full-mode rejuvenation that wipes PLM-C leaves it intact and the controller
// restores the state from it. Single port, synchronous, one cycle read latency.
// The depth of one State BRAM image is this design's choice.
module checkpoint_sram #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end
endmodule
