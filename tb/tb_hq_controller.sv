// tb_hq_controller: the controller alone (hashing of messages off, four log
// slots) in an environment modelled by the testbench: PLM-C and checkpoint SRAM
// as arrays, MP-Boot as a process that reloads tiles after a delay, and three
// behavioural tiles that serve requests from PLM-C and write their replies to
// their own Rep memory. Each tile can be made Byzantine (wrong reply), silent,
// or stuck (no Ready after its next reload); MP-Boot can ignore one command.
// Scenarios and checks:
//   boot        Bootloader then Tileloader command, status Ready
//   agreement   RSP_OK with the right reply and consecutive uids
//   log wrap    checkpoint with the next uid, Req/Rep cleared
//   1 wrong     RSP_DEGRADED with the majority reply, partial reload of that tile
//   2 wrong     RSP_FAIL, full reload, state restored (next uid kept)
//   silent      reply timeout, RSP_DEGRADED, partial reload
//   MP-Boot     a lost command is repeated after the MP-Boot timeout
//   no Ready    Ready timeout, the late tile is reloaded again
//   history     log count in the State header equals the delivered rounds
module tb_hq_controller;
  import samsara_pkg::*;
  localparam int LOG_DEPTH = 4, AW = $clog2(LOG_DEPTH * SLOT_STRIDE), DEPTH = LOG_DEPTH * SLOT_STRIDE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  status_e status;
  logic q_valid = 0, q_pop; logic [255:0] q_data = '0;
  logic rsp_valid; logic [31:0] rsp_uid; logic [255:0] rsp_data; rsp_status_e rsp_status;
  logic c_en, c_we, c_clear, c_busy; bank_e c_bank; logic [AW-1:0] c_addr; logic [31:0] c_wdata, c_rdata;
  logic [2:0] t_en; bank_e [2:0] t_bank; logic [2:0][AW-1:0] t_addr; logic [2:0][31:0] t_rdata;
  logic t_clear; logic [2:0] t_ready;
  logic ck_en, ck_we; logic [3:0] ck_addr; logic [31:0] ck_wdata, ck_rdata;
  logic mb_start, mb_done; tl_cmd_t mb_cmd;
  logic [2:0] active; logic [2:0][VER_W-1:0] version; logic [2:0][LOC_W-1:0] location;
  logic ev_partial, ev_full, ev_proactive, ev_checkpoint, ev_reply_timeout, ev_ready_timeout,
        ev_mb_timeout, ev_log_wrap;

  hq_controller #(.LOG_DEPTH(LOG_DEPTH), .HASH_EN(1'b0), .REPLY_TIMEOUT(300),
                  .READY_TIMEOUT(400), .MB_TIMEOUT(200)) dut (.*);

  // ------------------------------------------------------------ memories
  logic [31:0] cm [3][DEPTH];
  logic [31:0] tm [3][3][DEPTH];
  logic [31:0] ck [STATE_WORDS];
  int c_busy_cnt = 0;
  assign c_busy = (c_busy_cnt != 0);
  always @(posedge clk) begin
    if (c_en) begin
      if (c_we) cm[int'(c_bank)][c_addr] = c_wdata;
      else c_rdata <= cm[int'(c_bank)][c_addr];
    end
    for (int i = 0; i < 3; i++) if (t_en[i]) t_rdata[i] <= tm[i][int'(t_bank[i])][t_addr[i]];
    if (ck_en) begin
      if (ck_we) ck[ck_addr] = ck_wdata;
      ck_rdata <= ck[ck_addr];
    end
    if (c_busy_cnt != 0) c_busy_cnt--;
    if (c_clear) begin
      for (int a = 0; a < DEPTH; a++) begin cm[0][a] = '0; cm[1][a] = '0; end
      c_busy_cnt = 8;
    end
    if (t_clear)
      for (int i = 0; i < 3; i++) for (int a = 0; a < DEPTH; a++) begin tm[i][0][a] = '0; tm[i][1][a] = '0; end
  end

  // ------------------------------------------------------------ MP-Boot model
  bit mb_ignore = 0;
  int n_mb = 0;
  tl_cmd_t mb_log [$];
  bit [2:0] reload = '0;   // pulse to the tile models
  initial begin
    mb_done = 0;
    forever begin
      @(posedge clk);
      if (mb_start) begin
        tl_cmd_t c;
        c = mb_cmd;
        n_mb++; mb_log.push_back(c);
        if (mb_ignore) mb_ignore = 0;
        else begin
          repeat (20) @(posedge clk);
          if (c.boot || c.full) for (int b = 0; b < 3; b++) for (int a = 0; a < DEPTH; a++) cm[b][a] = '0;
          for (int i = 0; i < 3; i++) if (c.full || c.mask[i]) reload[i] = 1;
          mb_done <= 1;
          @(posedge clk); mb_done <= 0;
        end
      end
    end
  end

  // ------------------------------------------------------------ tile models
  bit [2:0] wrong = '0, silent = '0, stuck = '0;
  int n_served [3];
  for (genvar g = 0; g < 3; g++) begin : g_tile
    int st = 0, cnt = 0, slot = 0;
    logic [31:0] exp_uid = 0;
    logic [255:0] rq, rp;
    int bs;
    assign t_ready[g] = (st >= 2) && active[g];
    always @(negedge clk) begin
      if (!rst_n) begin st = 0; n_served[g] = 0; end
      else if (reload[g]) begin
        reload[g] = 0;
        for (int b = 0; b < 3; b++) for (int a = 0; a < DEPTH; a++) tm[g][b][a] = '0;
        st = stuck[g] ? 0 : 1; stuck[g] = 0; cnt = 0;
      end else case (st)
        1: if (cm[2][S_NEXT_UID] != 0) begin          // state transfer
             cnt = cnt + 1;
             if (cnt == 6) begin exp_uid = cm[2][S_NEXT_UID]; slot = cm[2][S_SLOT]; st = 2; end
           end
        2: if (cm[0][slot * SLOT_STRIDE + OFF_UID] == exp_uid && !silent[g]) begin
             for (int w = 0; w < MSG_WORDS; w++) rq[255 - 32*w -: 32] = cm[0][slot * SLOT_STRIDE + OFF_DATA + w];
             st = 3; cnt = 0;
           end
        3: begin
           cnt = cnt + 1;
           if (cnt == 10 + 7 * g) begin
             bs = slot * SLOT_STRIDE;
             rp = ~rq ^ (wrong[g] ? 256'(g + 1) : '0);
             for (int w = 0; w < MSG_WORDS; w++) begin
               tm[g][1][bs + OFF_DATA + w] = rp[255 - 32*w -: 32];
               tm[g][1][bs + OFF_DIG + w] = '0;
             end
             tm[g][1][bs + OFF_TID] = g;
             tm[g][1][bs + OFF_UID] = exp_uid;
             n_served[g]++;
             exp_uid++; slot = (slot + 1) % LOG_DEPTH; st = 2;
           end
           end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------ checks
  int checks = 0, failures = 0;
  int n_partial = 0, n_full = 0, n_ckpt = 0, n_rto = 0, n_ready_to = 0, n_mbto = 0, n_wrap = 0;
  always @(posedge clk) if (rst_n) begin
    n_partial += ev_partial; n_full += ev_full; n_ckpt += ev_checkpoint; n_rto += ev_reply_timeout;
    n_ready_to += ev_ready_timeout; n_mbto += ev_mb_timeout; n_wrap += ev_log_wrap;
  end
  task automatic chk(input bit c, input string name);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (t=%0t)", name, $time); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_ready(input int limit);
    int n = 0;
    while (status != ST_READY && n < limit) begin @(negedge clk); n++; end
    chk(status == ST_READY, "status Ready");
  endtask
  task automatic wait_rejuv(input int limit);
    int n = 0;
    while (status == ST_READY && n < 1000) begin @(negedge clk); n++; end
    chk(status == ST_LOADING, "status Loading during rejuvenation");
    wait_ready(limit);
  endtask
  task automatic round(input logic [255:0] r, input logic [31:0] exp_uid, input rsp_status_e exp_st, input string name);
    int n = 0;
    @(negedge clk); q_valid = 1; q_data = r;
    #1;
    while (!q_pop) begin @(negedge clk); #1; end
    @(negedge clk); q_valid = 0;
    while (!rsp_valid && n < 5000) begin @(negedge clk); n++; end
    chk(rsp_valid, {name, ": response"});
    chk(rsp_uid == exp_uid, {name, ": uid"});
    chk(rsp_status == exp_st, {name, ": status"});
    if (exp_st != RSP_FAIL) chk(rsp_data == ~r, {name, ": majority reply"});
    @(negedge clk);
  endtask

  initial begin
    cfg = '0; cfg.min_tiles = 3'd1; cfg.max_tiles = 3'd3; cfg.severity_f = 2'd1;
    cfg.stateful = 1'b1; cfg.softcore = 4'h3;
    for (int b = 0; b < 3; b++) for (int a = 0; a < DEPTH; a++) cm[b][a] = '0;
    for (int i = 0; i < 3; i++) for (int b = 0; b < 3; b++) for (int a = 0; a < DEPTH; a++) tm[i][b][a] = '0;
    for (int a = 0; a < STATE_WORDS; a++) ck[a] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // boot
    wait_ready(3000);
    chk(mb_log.size() == 2 && mb_log[0].boot && !mb_log[1].boot && mb_log[1].full &&
        mb_log[1].mask == 3'b111 && mb_log[1].active == 3'b111 && mb_log[1].softcore == 4'h3,
        "Bootloader then Tileloader");
    chk(active == 3'b111, "three tiles active");

    // agreement and log wrap (uids 1..4 fill the four slots)
    round({8{32'h0101_0101}}, 1, RSP_OK, "agreement 1");
    round({8{32'h0202_0202}}, 2, RSP_OK, "agreement 2");
    round({8{32'h0303_0303}}, 3, RSP_OK, "agreement 3");
    round({8{32'h0404_0404}}, 4, RSP_OK, "agreement 4");
    repeat (400) @(negedge clk);
    chk(n_wrap == 1, "log wrap");
    chk(ck[S_NEXT_UID] == 5 && ck[S_SLOT] == 0 && ck[S_COUNT] == 4, "checkpoint after wrap");
    chk(cm[0][OFF_UID] == 0 && cm[1][3 * SLOT_STRIDE + OFF_UID] == 0, "Req/Rep cleared after wrap");
    chk(tm[2][1][OFF_UID] == 0, "tile memories cleared after wrap");

    // one Byzantine tile
    wrong = 3'b010;
    round({8{32'hbeef_0005}}, 5, RSP_DEGRADED, "one wrong");
    wrong = '0;
    wait_rejuv(3000);
    chk(n_partial == 1 && mb_log[$].mask == 3'b010 && !mb_log[$].full, "partial reload of tile 1");

    // two Byzantine tiles
    wrong = 3'b101;
    round({8{32'hbeef_0006}}, 6, RSP_FAIL, "two wrong");
    wrong = '0;
    wait_rejuv(3000);
    chk(n_full == 1 && mb_log[$].full && mb_log[$].mask == 3'b111, "full reload");
    chk(cm[2][S_NEXT_UID] == 7 && cm[2][S_COUNT] == 5, "state restored after full reload");
    round({8{32'hbeef_0007}}, 7, RSP_OK, "after full reload");

    // silent tile
    silent = 3'b100;
    round({8{32'hbeef_0008}}, 8, RSP_DEGRADED, "silent tile");
    silent = '0;
    wait_rejuv(3000);
    chk(n_rto == 1 && n_partial == 2 && mb_log[$].mask == 3'b100, "reply timeout and reload");

    // MP-Boot loses a command
    mb_ignore = 1; wrong = 3'b001;
    round({8{32'hbeef_0009}}, 9, RSP_DEGRADED, "lost MP-Boot command");
    wrong = '0;
    wait_rejuv(3000);
    chk(n_mbto == 1, "MP-Boot timeout and retry");

    // a tile that does not come back
    stuck = 3'b010; wrong = 3'b010;
    round({8{32'hbeef_000a}}, 10, RSP_DEGRADED, "stuck tile");
    wrong = '0;
    wait_rejuv(5000);
    chk(n_ready_to == 1 && n_partial == 5 && mb_log[$].mask == 3'b010 && !mb_log[$].full,
        "Ready timeout, late tile reloaded again");
    round({8{32'hbeef_000b}}, 11, RSP_OK, "after recovery");
    repeat (400) @(negedge clk);
    chk(cm[2][S_COUNT] == 10 && cm[2][S_NEXT_UID] == 12, "log count counts delivered rounds");
    $display("mb=%0d partial=%0d full=%0d ckpt=%0d reply_to=%0d ready_to=%0d mb_to=%0d wrap=%0d",
             n_mb, n_partial, n_full, n_ckpt, n_rto, n_ready_to, n_mbto, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
