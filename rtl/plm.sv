// plm: a PL memory, either the controller's PLM-C or a tile's PLM-i. It holds
// three BRAMs, Req (r), Rep (p) and State (s), each behind its own Reset IP. The
// owner has one read/write port and selects a BRAM with `o_bank`; each of the
// NREAD readers has a read-only port of its own. A `clear` pulse wipes the Req
// and Rep BRAMs (start of a new log round after a checkpoint) and leaves the
// State BRAM; reset wipes all three. `busy` is high while any BRAM is being
// cleared, and the owner must not write then.
// Timing: one cycle read latency; addresses are word addresses inside a BRAM.
// The three-BRAM split and the access rights follow the platform's memory map;
// the port widths and clear behaviour are this design's choices.
module plm
  import samsara_pkg::*;
#(
  parameter int unsigned DEPTH_SLOTS = 3200,   // depth of the Req and Rep BRAMs
  parameter int unsigned NREAD       = 1,
  parameter int unsigned AW          = $clog2(DEPTH_SLOTS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  output logic                     busy,
  input  logic                     o_en,
  input  logic                     o_we,
  input  bank_e                    o_bank,
  input  logic [AW-1:0]            o_addr,
  input  logic [31:0]              o_wdata,
  output logic [31:0]              o_rdata,
  input  logic [NREAD-1:0]         r_en,
  input  bank_e [NREAD-1:0]        r_bank,
  input  logic [NREAD-1:0][AW-1:0] r_addr,
  output logic [NREAD-1:0][31:0]   r_rdata
);
  localparam int unsigned SAW = $clog2(STATE_WORDS);

  logic [2:0] bbusy;
  assign busy = |bbusy;

  bank_e o_bank_q;
  bank_e [NREAD-1:0] r_bank_q;
  always_ff @(posedge clk) begin
    o_bank_q <= o_bank;
    r_bank_q <= r_bank;
  end

  logic [2:0][31:0]            o_rd;
  logic [2:0][NREAD-1:0][31:0] r_rd;

  for (genvar b = 0; b < 3; b++) begin : g_bank
    localparam int unsigned D   = (b == 2) ? STATE_WORDS : DEPTH_SLOTS;
    localparam int unsigned BAW = (b == 2) ? SAW : AW;
    logic          m_en, m_we;
    logic [BAW-1:0] m_addr;
    logic [31:0]   m_wdata;
    logic [NREAD-1:0]          rb_en;
    logic [NREAD-1:0][BAW-1:0] rb_addr;
    for (genvar i = 0; i < NREAD; i++) begin : g_r
      assign rb_en[i]   = r_en[i] && (r_bank[i] == bank_e'(b));
      assign rb_addr[i] = BAW'(r_addr[i]);
    end

    plm_reset #(.DEPTH(D), .AW(BAW)) u_rst (
      .clk, .rst_n,
      .clear    (clear && (b != 2)),
      .busy     (bbusy[b]),
      .own_en   (o_en && (o_bank == bank_e'(b))),
      .own_we   (o_we),
      .own_addr (BAW'(o_addr)),
      .own_wdata(o_wdata),
      .mem_en   (m_en),
      .mem_we   (m_we),
      .mem_addr (m_addr),
      .mem_wdata(m_wdata)
    );

    plm_bram #(.DEPTH(D), .NREAD(NREAD), .AW(BAW)) u_bram (
      .clk,
      .o_en   (m_en),
      .o_we   (m_we),
      .o_addr (m_addr),
      .o_wdata(m_wdata),
      .o_rdata(o_rd[b]),
      .r_en   (rb_en),
      .r_addr (rb_addr),
      .r_rdata(r_rd[b])
    );
  end

  assign o_rdata = o_rd[o_bank_q];
  for (genvar i = 0; i < NREAD; i++) begin : g_rmux
    assign r_rdata[i] = r_rd[r_bank_q[i]][i];
  end
endmodule
