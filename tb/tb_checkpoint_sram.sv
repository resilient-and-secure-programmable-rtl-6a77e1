// tb_checkpoint_sram: fills the checkpoint SRAM with a random state image,
// reads it back in a different order, and checks that a disabled port neither
// writes nor changes the read register.
module tb_checkpoint_sram;
  localparam int DEPTH = 16, AW = 4;
  logic clk = 0, en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  always #5 clk = ~clk;
  checkpoint_sram #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] img [DEPTH];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      img[i] = $urandom;
      @(negedge clk); en = 1; we = 1; addr = AW'(i); wdata = img[i];
    end
    for (int i = DEPTH - 1; i >= 0; i--) begin
      @(negedge clk); en = 1; we = 0; addr = AW'(i);
      @(negedge clk); en = 0;
      checks++; if (rdata != img[i]) begin failures++; $display("FAIL word %0d", i); end
    end
    // disabled port: no write, read register holds
    @(negedge clk); en = 0; we = 1; addr = 4'd3; wdata = ~img[3];
    @(negedge clk); we = 0;
    checks++; if (rdata != img[0]) begin failures++; $display("FAIL rdata changed while disabled"); end
    @(negedge clk); en = 1; addr = 4'd3;
    @(negedge clk); en = 0;
    checks++; if (rdata != img[3]) begin failures++; $display("FAIL write while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
