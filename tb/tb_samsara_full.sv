// tb_samsara_full: the platform at its default size (100-slot log, full
// timeouts, SHA-256 on every message), with the behavioural MP-Boot and compute
// core models. It boots, serves 105 requests so that the log wraps once (a
// checkpoint after 100 requests and a Reset IP clear of the 3200-word Req/Rep
// BRAMs), then makes one tile Byzantine and checks degraded delivery, the
// partial-mode reload of that tile and service after the reload. Every reply is
// compared with the reference operation.
module tb_samsara_full;
  import samsara_pkg::*;

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

  samsara_top dut (.*);

  logic ignore_next = 0;
  logic [MAX_TILES-1:0] stuck_mask = '0;
  int n_cmds;
  mpboot_model #(.BOOT_CYCLES(200), .LOAD_CYCLES(100), .STUCK_CYCLES(1000)) u_mb (
    .clk, .rst_n, .start(mb_start), .cmd(mb_cmd), .done(mb_done), .pl_full_rst_n,
    .tile_rst_n, .ignore_next, .stuck_mask, .n_cmds);

  int fault_kind [MAX_TILES];
  logic [MAX_TILES-1:0][255:0] flip;
  for (genvar i = 0; i < MAX_TILES; i++) begin : g_core
    tile_core_model #(.LATENCY(20 + 5 * i), .SLOW(100000)) u_core (
      .clk, .rst_n(rst_n && tile_rst_n[i] && pl_full_rst_n), .start(cmp_start[i]),
      .req(cmp_req[i]), .done(cmp_done[i]), .rep(cmp_rep[i]),
      .fault_kind(fault_kind[i]), .flip(flip[i]));
  end
  always @(posedge clk)
    if (mb_start)
      for (int i = 0; i < MAX_TILES; i++)
        if (mb_cmd.mask[i] || mb_cmd.full) fault_kind[i] = 0;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_partial = 0, n_ckpt = 0, n_wrap = 0, n_herr = 0;
  always @(posedge clk) if (rst_n) begin
    n_partial += int'(ev_partial); n_ckpt += int'(ev_checkpoint); n_wrap += int'(ev_log_wrap);
    for (int i = 0; i < MAX_TILES; i++) n_herr += int'(tile_hash_err[i]);
  end

  function automatic logic [255:0] ref_op(input logic [255:0] r);
    return {r[254:0], r[255]} ^ {8{32'h5a5a_c3c3}};
  endfunction

  int unsigned exp_uid = 1;
  task automatic wait_ready();
    int n = 0;
    while (status != ST_READY && n < 200000) begin @(posedge clk); n++; end
    check(status == ST_READY, "controller reached Ready");
  endtask
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
    while (!rsp_valid && n < 50000) begin @(negedge clk); n++; end
    check(rsp_valid && rsp_uid == exp_uid && rsp_status == exp_st && rsp_data == ref_op(r),
          $sformatf("%s: uid %0d exp %0d status %s", name, rsp_uid, exp_uid, rsp_status.name()));
    exp_uid++;
    @(negedge clk);
  endtask

  initial begin
    int t0;
    cfg = '0;
    cfg.softcore = 4'd1;
    cfg.min_tiles = 3'd1; cfg.max_tiles = 3'd3;
    cfg.stateful = 1'b1;
    cfg.policy = '{diversify: 1'b1, relocate: 1'b0, scale: 1'b0, proactive: 1'b0};
    cfg.severity_f = 2'd1;
    for (int i = 0; i < MAX_TILES; i++) begin fault_kind[i] = 0; flip[i] = 256'd1 << (i * 11); end
    repeat (5) @(negedge clk); rst_n = 1;

    wait_ready();
    check(active == 3'b111 && n_cmds == 2, "booted with three tiles");
    t0 = int'($time / 10);
    for (int i = 0; i < 105; i++) round(RSP_OK, "all-agree");
    $display("105 rounds in %0d cycles", int'($time / 10) - t0);
    repeat (500) @(negedge clk);
    check(n_wrap == 1, "log wrapped once after 100 requests");
    check(dut.u_plm_c.g_bank[2].u_bram.mem[S_COUNT] == 32'd105, "105 rounds logged");

    fault_kind[1] = 1;
    round(RSP_DEGRADED, "byzantine tile 1");
    begin
      int n = 0;
      while (status == ST_READY && n < 5000) begin @(posedge clk); n++; end
    end
    wait_ready();
    check(n_partial == 1 && mb_cmd.mask == 3'b010 && !mb_cmd.full, "partial-mode reload of tile 1");
    round(RSP_OK, "after reload");
    check(n_herr == 0, "no digest mismatches on a healthy interconnect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
