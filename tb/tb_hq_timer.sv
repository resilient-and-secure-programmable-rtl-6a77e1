// tb_hq_timer: for several limits checks that `expired` rises exactly `limit`
// cycles after the start edge, stays high, is cleared by `stop` and by a new
// `start`, and that a restart before expiry begins a fresh count.
module tb_hq_timer;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, running, expired;
  logic [15:0] limit = '0;
  always #5 clk = ~clk;
  hq_timer #(.W(16)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic go(input int l);
    @(negedge clk); start = 1; limit = 16'(l);
    @(negedge clk); start = 0;
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int l, n;
      l = (t == 0) ? 1 : 3 + t * 17;
      go(l);
      n = 0;
      while (!expired && n < 1000) begin @(negedge clk); n++; end
      checks++; if (n != l) begin failures++; $display("FAIL limit %0d expired after %0d", l, n); end
      repeat (3) @(negedge clk);
      checks++; if (!expired) begin failures++; $display("FAIL expired not sticky"); end
      @(negedge clk); stop = 1; @(negedge clk); stop = 0;
      checks++; if (expired) begin failures++; $display("FAIL stop"); end
    end
    // restart before expiry
    go(20); repeat (10) @(negedge clk); go(20);
    begin
      int n = 0;
      while (!expired && n < 1000) begin @(negedge clk); n++; end
      checks++; if (n != 20) begin failures++; $display("FAIL restart %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
