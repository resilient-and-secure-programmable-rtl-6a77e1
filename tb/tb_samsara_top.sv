// tb_samsara_top: end-to-end test of the platform at a reduced log depth and
// short timeouts, with behavioural models of MP-Boot and of the three tiles'
// compute cores. Every response is compared with the reference operation
// computed here. The scenario walks through every mechanism and counts it:
// bootstrapping, all-agree rounds, a Byzantine tile (degraded delivery and
// partial-mode rejuvenation with diversification), a hung tile (reply timeout),
// two disagreeing tiles (no majority, full-mode rejuvenation), log wrap with
// checkpoint and Reset IP clear, an unresponsive MP-Boot, a tile late with its
// Ready, a rate-limited request, proactive rejuvenation and scale-in/out with
// relocation. A mechanism that never happened counts as a failure.
module tb_samsara_top;
  import samsara_pkg::*;

  localparam int LOG_DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic [15:0] rl_min_gap = 0, rl_win_len = 16'd1000, rl_win_max = 0;
  logic req_valid = 0, req_ready, req_dropped;
  logic [255:0] req_data = '0;
  logic rsp_valid;
  logic [31:0] rsp_uid;
  logic [255:0] rsp_data;
  rsp_status_e rsp_status;
  status_e status;
  logic mb_start, mb_done, pl_full_rst_n;
  tl_cmd_t mb_cmd;
  logic [MAX_TILES-1:0] tile_rst_n, cmp_start, cmp_done, active, tile_ready, tile_hash_err, tile_served;
  logic [MAX_TILES-1:0][255:0] cmp_req, cmp_rep;
  logic [MAX_TILES-1:0][VER_W-1:0] version;
  logic [MAX_TILES-1:0][LOC_W-1:0] location;
  logic ev_partial, ev_full, ev_proactive, ev_checkpoint, ev_reply_timeout,
        ev_ready_timeout, ev_mb_timeout, ev_log_wrap;

  samsara_top #(.LOG_DEPTH(LOG_DEPTH), .REPLY_TIMEOUT(2000), .READY_TIMEOUT(1500),
                .MB_TIMEOUT(600)) dut (.*);

  logic ignore_next = 0;
  logic [MAX_TILES-1:0] stuck_mask = '0;
  int n_cmds;
  mpboot_model #(.BOOT_CYCLES(30), .LOAD_CYCLES(20), .STUCK_CYCLES(3000)) u_mb (
    .clk, .rst_n, .start(mb_start), .cmd(mb_cmd), .done(mb_done), .pl_full_rst_n,
    .tile_rst_n, .ignore_next, .stuck_mask, .n_cmds);

  int fault_kind [MAX_TILES];
  logic [MAX_TILES-1:0][255:0] flip;
  for (genvar i = 0; i < MAX_TILES; i++) begin : g_core
    tile_core_model #(.LATENCY(10 + 3 * i), .SLOW(100000)) u_core (
      .clk, .rst_n(rst_n && tile_rst_n[i] && pl_full_rst_n), .start(cmp_start[i]),
      .req(cmp_req[i]), .done(cmp_done[i]), .rep(cmp_rep[i]),
      .fault_kind(fault_kind[i]), .flip(flip[i]));
  end

  // a reloaded tile comes back healthy (fresh or diverse bitstream)
  always @(posedge clk)
    if (mb_start && !ignore_next)
      for (int i = 0; i < MAX_TILES; i++)
        if (mb_cmd.mask[i] || mb_cmd.full) fault_kind[i] = 0;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  int n_partial = 0, n_full = 0, n_pro = 0, n_ckpt = 0, n_rto = 0, n_rdyto = 0,
      n_mbto = 0, n_wrap = 0, n_drop = 0, n_ok = 0, n_deg = 0, n_fail = 0, n_herr = 0;
  always @(posedge clk) if (rst_n) begin
    n_partial += int'(ev_partial); n_full += int'(ev_full); n_pro += int'(ev_proactive);
    n_ckpt += int'(ev_checkpoint); n_rto += int'(ev_reply_timeout);
    n_rdyto += int'(ev_ready_timeout); n_mbto += int'(ev_mb_timeout);
    n_wrap += int'(ev_log_wrap); n_drop += int'(req_dropped);
    for (int i = 0; i < MAX_TILES; i++) n_herr += int'(tile_hash_err[i]);
  end

  function automatic logic [255:0] ref_op(input logic [255:0] r);
    return {r[254:0], r[255]} ^ {8{32'h5a5a_c3c3}};
  endfunction

  int unsigned exp_uid = 1;
  int delivered = 0;

  task automatic wait_ready();
    int n = 0;
    while (status != ST_READY && n < 100000) begin @(posedge clk); n++; end
    check(status == ST_READY, "controller reached Ready");
  endtask

  // wait until a rejuvenation has started and finished
  task automatic wait_rejuv();
    int n = 0;
    while (status == ST_READY && n < 5000) begin @(posedge clk); n++; end
    check(status == ST_LOADING, "rejuvenation started");
    wait_ready();
  endtask

  // send one request and check the response
  task automatic round(input rsp_status_e exp_st, input string name);
    logic [255:0] r;
    int n;
    wait_ready();
    r = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    req_valid = 1; req_data = r;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    n = 0;
    while (!rsp_valid && n < 20000) begin @(negedge clk); n++; end
    check(rsp_valid, {name, ": response arrived"});
    check(rsp_uid == exp_uid, $sformatf("%s: uid %0d exp %0d", name, rsp_uid, exp_uid));
    check(rsp_status == exp_st, $sformatf("%s: status %s exp %s", name, rsp_status.name(), exp_st.name()));
    if (exp_st != RSP_FAIL) begin
      check(rsp_data == ref_op(r), {name, ": reply equals the reference operation"});
      delivered++;
    end
    case (rsp_status)
      RSP_OK: n_ok++;
      RSP_DEGRADED: n_deg++;
      default: n_fail++;
    endcase
    exp_uid++;
    @(negedge clk);
  endtask

  logic [MAX_TILES-1:0][VER_W-1:0] v0;
  logic [MAX_TILES-1:0][LOC_W-1:0] l0;
  int cmds0, n_div = 0, n_reloc = 0, n_scale_in = 0, n_scale_out = 0, t0;

  initial begin
    cfg = '0;
    cfg.softcore = 4'd1; cfg.version = '0;
    cfg.min_tiles = 3'd1; cfg.max_tiles = 3'd3;
    cfg.stateful = 1'b1;
    cfg.policy = '{diversify: 1'b1, relocate: 1'b1, scale: 1'b0, proactive: 1'b0};
    cfg.severity_f = 2'd1;
    cfg.proactive_period = 32'd200;
    for (int i = 0; i < MAX_TILES; i++) begin fault_kind[i] = 0; flip[i] = 256'd1 << (i * 7); end

    repeat (5) @(negedge clk); rst_n = 1;

    // 1. bootstrapping
    wait_ready();
    check(active == 3'b111, "three tiles active after bootstrapping");
    check(n_cmds == 2, "Bootloader then Tileloader were run");

    // 2. rounds in which all tiles agree (also wraps the log of depth 4)
    for (int i = 0; i < 5; i++) round(RSP_OK, "all-agree");
    check(n_wrap == 1, "log wrapped after LOG_DEPTH rounds");

    // 3. Byzantine tile 2 -> degraded delivery, partial-mode rejuvenation, diversify
    v0 = version;
    fault_kind[2] = 1;
    round(RSP_DEGRADED, "byzantine tile");
    wait_rejuv();
    if (version[2] != v0[2]) n_div++;
    check(version[2] != v0[2] && version[1:0] == v0[1:0], "only tile 2 got a diverse version");
    round(RSP_OK, "after state transfer");

    // 4. hung tile 0 -> reply timeout, degraded, partial
    fault_kind[0] = 2;
    round(RSP_DEGRADED, "hung tile");
    wait_rejuv();
    round(RSP_OK, "after hung tile reload");

    // 5. two Byzantine tiles with different wrong replies -> no majority, full mode
    fault_kind[0] = 1; fault_kind[1] = 1;
    round(RSP_FAIL, "two byzantine tiles");
    wait_rejuv();
    round(RSP_OK, "after full-mode rejuvenation");

    // 6. unresponsive MP-Boot and a tile late with its Ready
    ignore_next = 1;
    stuck_mask = 3'b010;
    fault_kind[1] = 1;
    fork
      begin
        @(posedge clk iff mb_start); @(negedge clk); ignore_next = 0;
      end
    join_none
    round(RSP_DEGRADED, "byzantine tile 1 with stuck reload");
    // the first reload of tile 1 is late; the second one is not
    @(posedge clk iff ev_ready_timeout);
    stuck_mask = '0;
    wait_ready();
    round(RSP_OK, "after MP-Boot retry and late Ready");

    // 7. rate limiter: two requests back to back with a minimum gap of 50 cycles
    rl_min_gap = 16'd50;
    @(negedge clk); req_valid = 1; req_data = 256'h1234;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_data = 256'h5678;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    repeat (2) @(negedge clk);
    check(n_drop == 1, "second back-to-back request was ignored");
    begin
      int n = 0;
      while (!rsp_valid && n < 20000) begin @(negedge clk); n++; end
      check(rsp_valid && rsp_data == ref_op(256'h1234), "first request served");
      exp_uid++; delivered++; n_ok++;
    end
    rl_min_gap = 0;
    repeat (5) @(negedge clk);

    // 8. scale-in with relocation, driven by proactive rejuvenation
    l0 = location;
    cfg.policy.scale = 1'b1; cfg.severity_f = 2'd0; cfg.policy.proactive = 1'b1;
    t0 = n_pro;
    while (n_pro == t0) @(negedge clk);
    wait_rejuv();
    cfg.policy.proactive = 1'b0;
    check(active == 3'b001, "scaled in to one tile");
    if (active == 3'b001) n_scale_in++;
    if (location[0] != l0[0]) n_reloc++;
    check(location[0] != l0[0], "tile 0 relocated to a free partition");
    round(RSP_OK, "single tile");

    // 9. scale-out back to three tiles
    cfg.severity_f = 2'd1; cfg.policy.proactive = 1'b1;
    t0 = n_pro;
    while (n_pro == t0) @(negedge clk);
    wait_rejuv();
    cfg.policy.proactive = 1'b0; cfg.policy.scale = 1'b0;
    check(active == 3'b111, "scaled out to three tiles");
    if (active == 3'b111) n_scale_out++;
    check(location[0] != location[1] && location[1] != location[2] && location[0] != location[2],
          "tiles occupy distinct partitions");
    round(RSP_OK, "three tiles again");
    round(RSP_OK, "three tiles again");

    // stateful log: the state header counts every delivered round (it is
    // written after the log entry and the history digest, so wait for it)
    repeat (400) @(negedge clk);
    check(dut.u_plm_c.g_bank[2].u_bram.mem[S_COUNT] == 32'(delivered),
          $sformatf("log count %0d exp %0d", dut.u_plm_c.g_bank[2].u_bram.mem[S_COUNT], delivered));
    check(dut.u_plm_c.g_bank[2].u_bram.mem[S_NEXT_UID] == exp_uid,
          $sformatf("state header next uid %0d exp %0d", dut.u_plm_c.g_bank[2].u_bram.mem[S_NEXT_UID], exp_uid));

    // every mechanism happened
    check(n_ok > 0, "all-agree delivery happened");
    check(n_deg > 0, "degraded delivery happened");
    check(n_fail > 0, "failed round happened");
    check(n_partial > 0, "partial-mode rejuvenation happened");
    check(n_full > 0, "full-mode rejuvenation happened");
    check(n_pro > 0, "proactive rejuvenation happened");
    check(n_ckpt > 0, "checkpoint happened");
    check(n_wrap > 0, "log wrap and clear happened");
    check(n_rto > 0, "reply timeout happened");
    check(n_rdyto > 0, "Ready timeout happened");
    check(n_mbto > 0, "MP-Boot timeout happened");
    check(n_drop > 0, "rate-limited drop happened");
    check(n_div > 0, "diversify happened");
    check(n_reloc > 0, "relocation happened");
    check(n_scale_in > 0 && n_scale_out > 0, "scale-in and scale-out happened");
    $display("ok=%0d degraded=%0d fail=%0d partial=%0d full=%0d proactive=%0d ckpt=%0d wrap=%0d rto=%0d rdyto=%0d mbto=%0d drop=%0d div=%0d reloc=%0d",
             n_ok, n_deg, n_fail, n_partial, n_full, n_pro, n_ckpt, n_wrap, n_rto, n_rdyto, n_mbto, n_drop, n_div, n_reloc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
