// tb_uid_counter: checks the start value 1, single steps, holds without `inc`,
// and that an 8-bit counter stops at 255 with `exhausted` instead of wrapping.
module tb_uid_counter;
  logic clk = 0, rst_n = 0, inc = 0, exhausted;
  logic [7:0] uid;
  always #5 clk = ~clk;
  uid_counter #(.W(8)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int exp = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (uid != 8'd1) begin failures++; $display("FAIL start %0d", uid); end
    for (int n = 0; n < 400; n++) begin
      inc = ($urandom % 3) != 0;
      @(negedge clk);
      if (inc && exp < 255) exp++;
      checks++;
      if (uid != 8'(exp)) begin failures++; $display("FAIL uid %0d exp %0d", uid, exp); end
    end
    checks++; if (!(exhausted && uid == 8'd255)) begin failures++; $display("FAIL not saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
