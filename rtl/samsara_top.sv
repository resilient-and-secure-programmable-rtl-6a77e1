// samsara_top: the resilient accelerator-offload platform. Applications hand
// 256-bit requests to a trusted controller; the controller runs each request on
// 2f+1 replicated tiles (three here, f = 1) in the programmable logic and
// returns a reply only when a majority of the tiles agree on it. Tiles that
// disagree or answer late are reloaded (rejuvenated) through MP-Boot, with the
// controller's state transferred to them from its PL memory.
//
// Inside:
//   request_frontend   application request queue and rate limiter
//   hq_controller      the controller (agreement, bootstrapping, rejuvenation)
//   checkpoint_sram    on-chip SRAM for state checkpoints, outside the PL
//   plm (PLM-C)        controller's PL memory, read-only for the tiles
//   per tile i: plm (PLM-i) and tile_agent, the tile's protocol engine
//
// Brought out as ports, because they are not part of this RTL:
//   - the compute core of each tile (cmp_*): the accelerator or softcore that
//     computes a reply from a request;
//   - MP-Boot with its Bootloader and Tileloader (mb_*): it receives a command,
//     performs the reconfiguration, which for this RTL means holding the
//     reconfigured region in reset (`pl_full_rst_n` for the whole PL,
//     `tile_rst_n[i]` for one tile), and pulses `mb_done`;
//   - the configuration held in tamper-resistant storage (cfg).
// A tile that is not in the active replica set is held in reset.
// Timing: see hq_controller and tile_agent; a round with hashing takes a few
// hundred cycles plus the compute time of the slowest agreeing tile.
// The blocks and the memory access rights follow the platform's architecture;
// dedicated memory ports instead of a shared bus, and modelling a reload as a
// reset held by MP-Boot, are this design's choices.
module samsara_top
  import samsara_pkg::*;
#(
  parameter int unsigned LOG_DEPTH     = 100,
  parameter bit          HASH_EN       = 1'b1,
  parameter int unsigned REPLY_TIMEOUT = 4000,
  parameter int unsigned READY_TIMEOUT = 20000,
  parameter int unsigned MB_TIMEOUT    = 1000000,
  parameter int unsigned FIFO_DEPTH    = 4
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  cfg_t                                  cfg,
  input  logic [15:0]                           rl_min_gap,
  input  logic [15:0]                           rl_win_len,
  input  logic [15:0]                           rl_win_max,
  // application
  input  logic                                  req_valid,
  output logic                                  req_ready,
  input  logic [255:0]                          req_data,
  output logic                                  req_dropped,
  output logic                                  rsp_valid,
  output logic [31:0]                           rsp_uid,
  output logic [255:0]                          rsp_data,
  output rsp_status_e                           rsp_status,
  output status_e                               status,
  // MP-Boot
  output logic                                  mb_start,
  output tl_cmd_t                               mb_cmd,
  input  logic                                  mb_done,
  input  logic                                  pl_full_rst_n,
  input  logic [MAX_TILES-1:0]                  tile_rst_n,
  // tile compute cores
  output logic [MAX_TILES-1:0]                  cmp_start,
  output logic [MAX_TILES-1:0][255:0]           cmp_req,
  input  logic [MAX_TILES-1:0]                  cmp_done,
  input  logic [MAX_TILES-1:0][255:0]           cmp_rep,
  // placement and events
  output logic [MAX_TILES-1:0]                  active,
  output logic [MAX_TILES-1:0][VER_W-1:0]       version,
  output logic [MAX_TILES-1:0][LOC_W-1:0]       location,
  output logic [MAX_TILES-1:0]                  tile_ready,
  output logic [MAX_TILES-1:0]                  tile_hash_err,
  output logic [MAX_TILES-1:0]                  tile_served,
  output logic                                  ev_partial,
  output logic                                  ev_full,
  output logic                                  ev_proactive,
  output logic                                  ev_checkpoint,
  output logic                                  ev_reply_timeout,
  output logic                                  ev_ready_timeout,
  output logic                                  ev_mb_timeout,
  output logic                                  ev_log_wrap
);
  localparam int unsigned AW  = $clog2(LOG_DEPTH * SLOT_STRIDE);
  localparam int unsigned SAW = $clog2(STATE_WORDS);

  // request frontend
  logic         q_valid, q_pop;
  logic [255:0] q_data;
  request_frontend #(.DEPTH(FIFO_DEPTH), .DW(256), .CW(16)) u_fe (
    .clk, .rst_n,
    .accept_en(status == ST_READY),
    .min_gap(rl_min_gap), .win_len(rl_win_len), .win_max(rl_win_max),
    .app_valid(req_valid), .app_ready(req_ready), .app_data(req_data),
    .dropped(req_dropped),
    .q_valid, .q_data, .q_pop);

  // controller <-> PLM-C
  logic          c_en, c_we, c_clear, c_busy;
  bank_e         c_bank;
  logic [AW-1:0] c_addr;
  logic [31:0]   c_wdata, c_rdata;
  // controller <-> tile PLMs
  logic [MAX_TILES-1:0]          t_en;
  bank_e [MAX_TILES-1:0]         t_bank;
  logic [MAX_TILES-1:0][AW-1:0]  t_addr;
  logic [MAX_TILES-1:0][31:0]    t_rdata;
  logic                          t_clear;
  // tiles <-> PLM-C
  logic [MAX_TILES-1:0]          tc_en;
  bank_e [MAX_TILES-1:0]         tc_bank;
  logic [MAX_TILES-1:0][AW-1:0]  tc_addr;
  logic [MAX_TILES-1:0][31:0]    tc_rdata;
  // checkpoint SRAM
  logic           ck_en, ck_we;
  logic [SAW-1:0] ck_addr;
  logic [31:0]    ck_wdata, ck_rdata;

  hq_controller #(
    .LOG_DEPTH(LOG_DEPTH), .HASH_EN(HASH_EN), .REPLY_TIMEOUT(REPLY_TIMEOUT),
    .READY_TIMEOUT(READY_TIMEOUT), .MB_TIMEOUT(MB_TIMEOUT), .AW(AW)
  ) u_ctrl (
    .clk, .rst_n, .cfg, .status,
    .q_valid, .q_data, .q_pop,
    .rsp_valid, .rsp_uid, .rsp_data, .rsp_status,
    .c_en, .c_we, .c_bank, .c_addr, .c_wdata, .c_rdata, .c_clear, .c_busy,
    .t_en, .t_bank, .t_addr, .t_rdata, .t_clear, .t_ready(tile_ready),
    .ck_en, .ck_we, .ck_addr, .ck_wdata, .ck_rdata,
    .mb_start, .mb_cmd, .mb_done,
    .active, .version, .location,
    .ev_partial, .ev_full, .ev_proactive, .ev_checkpoint,
    .ev_reply_timeout, .ev_ready_timeout, .ev_mb_timeout, .ev_log_wrap);

  checkpoint_sram #(.DEPTH(STATE_WORDS)) u_ckpt (
    .clk, .en(ck_en), .we(ck_we), .addr(ck_addr), .wdata(ck_wdata), .rdata(ck_rdata));

  // PLM-C: reset with the whole PL
  logic pl_rst_n;
  assign pl_rst_n = rst_n && pl_full_rst_n;

  plm #(.DEPTH_SLOTS(LOG_DEPTH * SLOT_STRIDE), .NREAD(MAX_TILES), .AW(AW)) u_plm_c (
    .clk, .rst_n(pl_rst_n), .clear(c_clear), .busy(c_busy),
    .o_en(c_en), .o_we(c_we), .o_bank(c_bank), .o_addr(c_addr), .o_wdata(c_wdata),
    .o_rdata(c_rdata),
    .r_en(tc_en), .r_bank(tc_bank), .r_addr(tc_addr), .r_rdata(tc_rdata));

  for (genvar i = 0; i < MAX_TILES; i++) begin : g_tile
    logic          trst_n;
    logic          o_en, o_we, o_busy;
    bank_e         o_bank;
    logic [AW-1:0] o_addr;
    logic [31:0]   o_wdata, o_rdata;
    // a tile and its PLM are reloaded together; inactive tiles stay in reset
    assign trst_n = pl_rst_n && tile_rst_n[i] && active[i];

    plm #(.DEPTH_SLOTS(LOG_DEPTH * SLOT_STRIDE), .NREAD(1), .AW(AW)) u_plm (
      .clk, .rst_n(trst_n), .clear(t_clear), .busy(o_busy),
      .o_en, .o_we, .o_bank, .o_addr, .o_wdata, .o_rdata,
      .r_en(t_en[i]), .r_bank(t_bank[i]), .r_addr(t_addr[i]), .r_rdata(t_rdata[i]));

    tile_agent #(.TID(i), .LOG_DEPTH(LOG_DEPTH), .HASH_EN(HASH_EN), .AW(AW)) u_agent (
      .clk, .rst_n(trst_n),
      .c_en(tc_en[i]), .c_bank(tc_bank[i]), .c_addr(tc_addr[i]), .c_rdata(tc_rdata[i]),
      .o_en, .o_we, .o_bank, .o_addr, .o_wdata, .o_busy,
      .ready(tile_ready[i]),
      .cmp_start(cmp_start[i]), .cmp_req(cmp_req[i]), .cmp_done(cmp_done[i]),
      .cmp_rep(cmp_rep[i]),
      .hash_err(tile_hash_err[i]), .served(tile_served[i]));
  end
endmodule
