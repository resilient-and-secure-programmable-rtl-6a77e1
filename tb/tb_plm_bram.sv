// tb_plm_bram: writes random words through the owner port and reads them back
// through the owner port and both read-only ports (one cycle latency), against
// a shadow array kept by the testbench; also checks that a read and a write of
// the same address in one cycle returns the old word.
module tb_plm_bram;
  localparam int DEPTH = 64, NREAD = 2, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic o_en = 0, o_we = 0;
  logic [AW-1:0] o_addr = '0;
  logic [31:0] o_wdata = '0, o_rdata;
  logic [NREAD-1:0] r_en = '0;
  logic [NREAD-1:0][AW-1:0] r_addr = '0;
  logic [NREAD-1:0][31:0] r_rdata;
  plm_bram #(.DEPTH(DEPTH), .NREAD(NREAD), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] shadow [DEPTH];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); o_en = 1; o_we = 1; o_addr = AW'(i); o_wdata = $urandom; shadow[i] = o_wdata;
    end
    @(negedge clk); o_en = 0; o_we = 0;
    for (int n = 0; n < 200; n++) begin
      logic [AW-1:0] a0, a1, a2;
      a0 = AW'($urandom); a1 = AW'($urandom); a2 = AW'($urandom);
      @(negedge clk);
      o_en = 1; o_we = 0; o_addr = a0; r_en = '1; r_addr[0] = a1; r_addr[1] = a2;
      @(negedge clk);
      o_en = 0; r_en = '0;
      checks += 3;
      if (o_rdata != shadow[a0]) begin failures++; $display("FAIL owner read %0d", a0); end
      if (r_rdata[0] != shadow[a1]) begin failures++; $display("FAIL port0 read %0d", a1); end
      if (r_rdata[1] != shadow[a2]) begin failures++; $display("FAIL port1 read %0d", a2); end
    end
    // read during write returns the old word
    @(negedge clk); o_en = 1; o_we = 1; o_addr = 6'd5; o_wdata = ~shadow[5]; r_en = 2'b01; r_addr[0] = 6'd5;
    @(negedge clk); o_en = 0; o_we = 0; r_en = '0;
    checks++; if (r_rdata[0] != shadow[5]) begin failures++; $display("FAIL read-during-write"); end
    shadow[5] = ~shadow[5];
    @(negedge clk); r_en = 2'b10; r_addr[1] = 6'd5;
    @(negedge clk); r_en = '0;
    checks++; if (r_rdata[1] != shadow[5]) begin failures++; $display("FAIL write then read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
