// plm_bram: one BRAM of a PL memory (PLM), with one read/write port for the
// entity that owns it and NREAD read-only ports for the entities allowed to read
// it. The owner of PLM-C is the controller and its readers are the tiles; the
// owner of PLM-i is tile i and its only reader is the controller. Read-only
// access is enforced structurally: a reader port has no write enable, so a
// faulty tile can never modify the controller's requests, nor another tile's
// replies. Each port has its own address and data path, so readers never
// contend (the dedicated-channel arrangement of the platform).
// Timing: synchronous, one cycle read latency on every port; a write and a read
// of the same address in the same cycle return the old word.
// The memory contents are not reset here; plm_reset clears them.
module plm_bram #(
  parameter int unsigned DEPTH = 3200,
  parameter int unsigned NREAD = 1,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  // owner port
  input  logic                    o_en,
  input  logic                    o_we,
  input  logic [AW-1:0]           o_addr,
  input  logic [31:0]             o_wdata,
  output logic [31:0]             o_rdata,
  // read-only ports
  input  logic [NREAD-1:0]        r_en,
  input  logic [NREAD-1:0][AW-1:0] r_addr,
  output logic [NREAD-1:0][31:0]  r_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (o_en) begin
      if (o_we && (32'(o_addr) < DEPTH)) mem[o_addr] <= o_wdata;
      o_rdata <= (32'(o_addr) < DEPTH) ? mem[o_addr] : '0;
    end
  end

  for (genvar i = 0; i < NREAD; i++) begin : g_rd
    always_ff @(posedge clk) begin
      if (r_en[i]) r_rdata[i] <= (32'(r_addr[i]) < DEPTH) ? mem[r_addr[i]] : '0;
    end
  end
endmodule
