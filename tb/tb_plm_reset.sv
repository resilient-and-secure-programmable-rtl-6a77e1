// tb_plm_reset: checks that the Reset IP sweeps every address once with zero
// data after reset and after a clear pulse, that it takes exactly DEPTH cycles,
// and that owner accesses pass through untouched when it is idle.
module tb_plm_reset;
  localparam int DEPTH = 40, AW = 6;
  logic clk = 0, rst_n = 0, clear = 0, busy;
  always #5 clk = ~clk;
  logic own_en = 0, own_we = 0; logic [AW-1:0] own_addr = '0; logic [31:0] own_wdata = '0;
  logic mem_en, mem_we; logic [AW-1:0] mem_addr; logic [31:0] mem_wdata;
  plm_reset #(.DEPTH(DEPTH), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic sweep(input string name);
    bit seen [DEPTH];
    int cyc = 0; bit ok = 1;
    for (int i = 0; i < DEPTH; i++) seen[i] = 0;
    while (busy) begin
      if (!(mem_en && mem_we && mem_wdata == 0 && 32'(mem_addr) < DEPTH)) ok = 0;
      else seen[mem_addr] = 1;
      @(negedge clk); cyc++;
    end
    for (int i = 0; i < DEPTH; i++) if (!seen[i]) ok = 0;
    checks++; if (!ok) begin failures++; $display("FAIL %s: not every word zeroed", name); end
    checks++; if (cyc != DEPTH) begin failures++; $display("FAIL %s: %0d cycles", name, cyc); end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep("after reset");
    own_en = 1; own_we = 1; own_addr = 6'd7; own_wdata = 32'hdead_beef; own_en = 1;
    #1;
    checks++; if (!(mem_en && mem_we && mem_addr == 6'd7 && mem_wdata == 32'hdead_beef)) begin
      failures++; $display("FAIL pass-through"); end
    own_en = 0; own_we = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (!busy) begin failures++; $display("FAIL busy after clear"); end
    own_en = 1; own_we = 1; own_addr = 6'd3; own_wdata = 32'h1;
    #1;
    checks++; if (mem_wdata != 0) begin failures++; $display("FAIL owner write not blocked"); end
    own_en = 0; own_we = 0;
    sweep("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
