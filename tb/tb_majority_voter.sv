// tb_majority_voter: random and directed vote patterns for three tiles with
// 16-bit replies. A reference vote computed in the testbench (count equal valid
// active replies, highest count wins, lowest index breaks ties) is compared with
// every output of the voter.
module tb_majority_voter;
  localparam int N = 3, DW = 16;
  logic [N-1:0] active, valid, agree;
  logic [N-1:0][DW-1:0] data;
  logic [DW-1:0] best;
  logic [1:0] best_count;
  logic quorum, all_match;
  majority_voter #(.N(N), .DW(DW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input string name);
    int cnt [N]; int sel, na; logic [N-1:0] eag;
    na = 0; for (int i = 0; i < N; i++) na += active[i];
    for (int i = 0; i < N; i++) begin
      cnt[i] = 0;
      for (int j = 0; j < N; j++)
        if (active[i] && valid[i] && active[j] && valid[j] && data[i] == data[j]) cnt[i]++;
    end
    sel = 0;
    for (int i = 1; i < N; i++) if (cnt[i] > cnt[sel]) sel = i;
    for (int j = 0; j < N; j++) eag[j] = active[j] && valid[j] && cnt[sel] > 0 && data[j] == data[sel];
    #1;
    checks++;
    if (best != data[sel] || int'(best_count) != cnt[sel] || agree != eag ||
        quorum != (na > 0 && cnt[sel] >= na / 2 + 1) || all_match != (na > 0 && cnt[sel] == na)) begin
      failures++;
      $display("FAIL %s act=%b val=%b data=%h/%h/%h best=%h cnt=%0d agree=%b q=%b all=%b",
               name, active, valid, data[0], data[1], data[2], best, best_count, agree, quorum, all_match);
    end
  endtask
  initial begin
    // directed: all agree, one Byzantine, two Byzantine disagreeing, one missing
    active = 3'b111; valid = 3'b111; data = '{16'h1234, 16'h1234, 16'h1234}; check("all");
    checks++; if (!(all_match && quorum && agree == 3'b111)) failures++;
    data = '{16'h9999, 16'h1234, 16'h1234}; check("one bad");
    checks++; if (!(!all_match && quorum && agree == 3'b011)) failures++;
    data = '{16'h0001, 16'h0002, 16'h0003}; check("all differ");
    checks++; if (quorum) failures++;
    data = '{16'h1234, 16'h1234, 16'h1234}; valid = 3'b101; check("one silent");
    checks++; if (!(quorum && !all_match && agree == 3'b101)) failures++;
    active = 3'b001; valid = 3'b001; check("single tile");
    checks++; if (!(quorum && all_match)) failures++;
    active = 3'b000; check("no tiles");
    checks++; if (quorum || all_match) failures++;
    for (int n = 0; n < 3000; n++) begin
      active = 3'($urandom); valid = 3'($urandom);
      for (int i = 0; i < N; i++) data[i] = 16'($urandom % 3);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
