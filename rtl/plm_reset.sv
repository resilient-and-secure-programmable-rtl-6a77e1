// plm_reset: the Reset IP of a PL memory BRAM. When triggered it writes zero to
// every word of the BRAM, one word per cycle, so that old request and reply slots
// (and their unique IDs) disappear. It runs by itself out of reset, which gives a
// freshly configured or reloaded PLM an all-zero content, and again on each
// `clear` pulse, which the controller raises after a checkpoint. While it runs it
// owns the BRAM's write port: the owner's writes are dropped and `busy` is high,
// and owners wait for `busy` to fall before they write.
// Timing: busy for DEPTH cycles after reset release or after the clear pulse.
// The platform has a simple Reset IP that resets the BRAMs; the word-by-word zero fill is
// this design's choice.
module plm_reset #(
  parameter int unsigned DEPTH = 3200,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  output logic          busy,
  // owner side
  input  logic          own_en,
  input  logic          own_we,
  input  logic [AW-1:0] own_addr,
  input  logic [31:0]   own_wdata,
  // BRAM side
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [31:0]   mem_wdata
);
  logic [AW-1:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b1;
      ptr  <= '0;
    end else if (busy) begin
      if (32'(ptr) == DEPTH - 1) begin
        busy <= 1'b0;
        ptr  <= '0;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end else if (clear) begin
      busy <= 1'b1;
      ptr  <= '0;
    end
  end

  always_comb begin
    if (busy) begin
      mem_en    = 1'b1;
      mem_we    = 1'b1;
      mem_addr  = ptr;
      mem_wdata = '0;
    end else begin
      mem_en    = own_en;
      mem_we    = own_we;
      mem_addr  = own_addr;
      mem_wdata = own_wdata;
    end
  end
endmodule
