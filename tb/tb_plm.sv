// tb_plm: a PL memory with two readers. Checks that it comes out of reset
// all-zero in every bank, that the owner's writes to the Req, Rep and State
// BRAMs are seen by the readers in the right bank, that readers on different
// banks in the same cycle get their own data, and that `clear` wipes Req and
// Rep but keeps State.
module tb_plm;
  import samsara_pkg::*;
  localparam int D = 64, NREAD = 2, AW = 6;
  logic clk = 0, rst_n = 0, clear = 0, busy;
  always #5 clk = ~clk;
  logic o_en = 0, o_we = 0; bank_e o_bank = BANK_REQ; logic [AW-1:0] o_addr = '0;
  logic [31:0] o_wdata = '0, o_rdata;
  logic [NREAD-1:0] r_en = '0; bank_e [NREAD-1:0] r_bank; logic [NREAD-1:0][AW-1:0] r_addr = '0;
  logic [NREAD-1:0][31:0] r_rdata;
  plm #(.DEPTH_SLOTS(D), .NREAD(NREAD), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic wr(input bank_e b, input int a, input logic [31:0] d);
    @(negedge clk); o_en = 1; o_we = 1; o_bank = b; o_addr = AW'(a); o_wdata = d;
    @(negedge clk); o_en = 0; o_we = 0;
  endtask
  task automatic rd2(input bank_e b0, input int a0, input bank_e b1, input int a1,
                     input logic [31:0] e0, input logic [31:0] e1, input string name);
    @(negedge clk); r_en = '1; r_bank[0] = b0; r_addr[0] = AW'(a0); r_bank[1] = b1; r_addr[1] = AW'(a1);
    @(negedge clk); r_en = '0;
    checks += 2;
    if (r_rdata[0] != e0) begin failures++; $display("FAIL %s port0 %h exp %h", name, r_rdata[0], e0); end
    if (r_rdata[1] != e1) begin failures++; $display("FAIL %s port1 %h exp %h", name, r_rdata[1], e1); end
  endtask
  initial begin
    r_bank = '{default: BANK_REQ};
    repeat (2) @(negedge clk); rst_n = 1;
    while (busy) @(negedge clk);
    rd2(BANK_REQ, 9, BANK_STATE, 3, 0, 0, "zero after reset");
    rd2(BANK_REP, 63, BANK_REP, 0, 0, 0, "zero after reset");
    wr(BANK_REQ, 9, 32'h1111_0009);
    wr(BANK_REP, 9, 32'h2222_0009);
    wr(BANK_STATE, 3, 32'h3333_0003);
    wr(BANK_STATE, 9, 32'h3333_0009);  // State BRAM holds STATE_WORDS = 16 words
    rd2(BANK_REQ, 9, BANK_REP, 9, 32'h1111_0009, 32'h2222_0009, "banks");
    rd2(BANK_STATE, 3, BANK_STATE, 9, 32'h3333_0003, 32'h3333_0009, "state");
    @(negedge clk); o_en = 1; o_bank = BANK_REP; o_addr = 6'd9;
    @(negedge clk); o_en = 0;
    checks++; if (o_rdata != 32'h2222_0009) begin failures++; $display("FAIL owner read"); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (!busy) begin failures++; $display("FAIL busy after clear"); end
    while (busy) @(negedge clk);
    rd2(BANK_REQ, 9, BANK_REP, 9, 0, 0, "cleared");
    rd2(BANK_STATE, 3, BANK_STATE, 9, 32'h3333_0003, 32'h3333_0009, "state kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
