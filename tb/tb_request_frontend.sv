// tb_request_frontend: random application traffic and random pops against a
// cycle-level reference of the two rate rules (minimum gap since the last
// accepted request, maximum accepted requests per fixed window counted from
// reset). Checks every `dropped` pulse, that accepted requests come out in
// order, that nothing is accepted while accept_en is low, and that app_ready
// falls when the FIFO is full.
module tb_request_frontend;
  localparam int DEPTH = 4, DW = 32, CW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic accept_en = 0;
  logic [CW-1:0] min_gap = '0, win_len = 16'd30, win_max = '0;
  logic app_valid = 0, app_ready, dropped, q_valid, q_pop = 0;
  logic [DW-1:0] app_data = '0, q_data;
  request_frontend #(.DEPTH(DEPTH), .DW(DW), .CW(CW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, evaluated on each rising edge with the sampled inputs
  logic [DW-1:0] expq [$];
  int edge_n = 0, last_acc = -1, acc_in_win = 0, n_drop = 0, n_acc = 0;
  bit exp_drop = 0;
  always @(posedge clk) if (rst_n) begin
    bit hs, soon, many, push;
    checks++;
    if (dropped != exp_drop) begin failures++; $display("FAIL dropped=%b exp %b at %0d", dropped, exp_drop, edge_n); end
    if (app_ready && !accept_en) begin failures++; $display("FAIL ready while disabled"); end
    if (!app_ready && accept_en && expq.size() < DEPTH) begin failures++; $display("FAIL not ready"); end
    if (q_pop && q_valid) begin
      checks++;
      if (expq.size() == 0 || q_data != expq[0]) begin failures++; $display("FAIL order %h", q_data); end
      else void'(expq.pop_front());
    end
    hs   = app_valid && app_ready;
    soon = last_acc >= 0 && (edge_n - last_acc) < int'(min_gap);
    many = win_max != 0 && acc_in_win >= int'(win_max);
    push = hs && !soon && !many;
    exp_drop = hs && !push;
    if (exp_drop) n_drop++;
    if (push) begin expq.push_back(app_data); last_acc = edge_n; n_acc++; end
    if ((edge_n % int'(win_len)) == int'(win_len) - 1) acc_in_win = 0;
    else if (push) acc_in_win++;
    edge_n++;
  end

  task automatic phase(input int cycles, input int pv, input int pp, input bit en);
    for (int n = 0; n < cycles; n++) begin
      @(negedge clk);
      accept_en = en;
      app_valid = ($urandom % 100) < pv;
      app_data  = $urandom;
      q_pop     = ($urandom % 100) < pp;
    end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    phase(300, 60, 40, 1);            // no limits: only backpressure
    min_gap = 16'd4; phase(400, 70, 50, 1);
    min_gap = 16'd0; win_max = 16'd5; phase(400, 70, 50, 1);
    min_gap = 16'd3; phase(400, 70, 50, 1);
    phase(100, 90, 50, 0);            // Loading: nothing accepted
    phase(100, 90, 5, 1);             // FIFO fills up
    @(negedge clk); app_valid = 0; q_pop = 1;
    repeat (DEPTH + 2) @(negedge clk);
    q_pop = 0;
    @(negedge clk);
    checks++; if (expq.size() != 0 || q_valid) begin failures++; $display("FAIL not drained"); end
    checks++; if (n_drop < 20 || n_acc < 50) begin failures++; $display("FAIL weak stimulus drop=%0d acc=%0d", n_drop, n_acc); end
    $display("accepted=%0d dropped=%0d", n_acc, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
