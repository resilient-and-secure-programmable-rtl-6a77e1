// hq_controller: the trusted controller of the platform. It mediates between
// the applications and the 2f+1 replicated tiles, runs the H-Quorum agreement
// and drives bootstrapping and rejuvenation through MP-Boot.
//
// Bootstrapping. Out of reset the status is Loading. The controller waits for
// its PLM-C to be cleared, writes the initial state (next uid 1, slot 0, empty
// history) to the State BRAM, checkpoints it, then asks MP-Boot to run the
// Bootloader and afterwards the Tileloader for the configured replica set. Each
// MP-Boot step is guarded by a timer (a silent MP-Boot is asked again). The
// checkpoint is written back to PLM-C and the controller waits, again under a
// timer, for every active tile to report Ready. Then the status becomes Ready.
//
// Execution (one round per request). The request at the head of the input queue
// gets the next unique ID. The controller hashes it and writes payload and
// digest to the request's slot of the PLM-C Req BRAM, uid word last, and arms
// the reply timer. It then polls the Rep BRAM of each active tile through the
// tile's read port; a reply whose uid matches is read in full, its digest is
// recomputed and its tile ID checked. When all active tiles have answered, or
// the timer has run out, the replies go to the majority voter:
//   all tiles agree         -> deliver (RSP_OK)
//   at least f+1 agree      -> deliver (RSP_DEGRADED), partial-mode rejuvenation
//                              of the tiles that disagreed or were late
//   fewer than f+1 agree    -> no delivery (RSP_FAIL, the application replays),
//                              full-mode rejuvenation
// For a stateful application a delivered round is logged (uid, request, reply)
// in the PLM-C Rep BRAM and folded into a running history digest,
// h' = SHA-256(h || reply). The State BRAM header (next uid, slot, log count,
// history digest) is rewritten after every round. After LOG_DEPTH rounds the
// slot index wraps: the state is checkpointed and the Req/Rep BRAMs of all PLMs
// are cleared by their Reset IPs.
//
// Rejuvenation. The status goes to Loading, the state is checkpointed into the
// on-chip SRAM, rejuv_policy turns the faulty set into a Tileloader command and
// MP-Boot runs it. The checkpoint is then written back to PLM-C (a full-mode
// reload wipes it), next-uid word last because reloaded tiles wait for that word
// to become non-zero before they copy the state, and the controller waits for Ready from the active tiles. If
// the timer runs out, the late tiles are rejuvenated again: partial-mode if they
// are a minority, full-mode otherwise. With the proactive policy a single tile
// (round robin) is also rejuvenated every `proactive_period` cycles.
//
// Interfaces: valid/pop request queue; one-cycle `rsp_valid` pulse with uid,
// reply and status; PLM-C owner port; one read port per tile PLM; a checkpoint
// SRAM port; `mb_start` pulse with `mb_cmd` and `mb_done` pulse from MP-Boot.
// The phases, the thresholds and the checkpoint/restore are the platform's;
// the timeouts, the polling order, the slot layout, the hash chaining and the
// MP-Boot retry are this design's choices.
module hq_controller
  import samsara_pkg::*;
#(
  parameter int unsigned LOG_DEPTH     = 100,
  parameter bit          HASH_EN       = 1'b1,
  parameter int unsigned REPLY_TIMEOUT = 4000,
  parameter int unsigned READY_TIMEOUT = 20000,
  parameter int unsigned MB_TIMEOUT    = 1000000,
  parameter int unsigned AW            = $clog2(LOG_DEPTH * SLOT_STRIDE)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  cfg_t                                   cfg,
  output status_e                                status,
  // request queue
  input  logic                                   q_valid,
  input  logic [255:0]                           q_data,
  output logic                                   q_pop,
  // response to the application
  output logic                                   rsp_valid,
  output logic [31:0]                            rsp_uid,
  output logic [255:0]                           rsp_data,
  output rsp_status_e                            rsp_status,
  // PLM-C owner port
  output logic                                   c_en,
  output logic                                   c_we,
  output bank_e                                  c_bank,
  output logic [AW-1:0]                          c_addr,
  output logic [31:0]                            c_wdata,
  input  logic [31:0]                            c_rdata,
  output logic                                   c_clear,
  input  logic                                   c_busy,
  // read ports on the tiles' PLMs
  output logic [MAX_TILES-1:0]                   t_en,
  output bank_e [MAX_TILES-1:0]                  t_bank,
  output logic [MAX_TILES-1:0][AW-1:0]           t_addr,
  input  logic [MAX_TILES-1:0][31:0]             t_rdata,
  output logic                                   t_clear,
  input  logic [MAX_TILES-1:0]                   t_ready,
  // checkpoint SRAM
  output logic                                   ck_en,
  output logic                                   ck_we,
  output logic [$clog2(STATE_WORDS)-1:0]         ck_addr,
  output logic [31:0]                            ck_wdata,
  input  logic [31:0]                            ck_rdata,
  // MP-Boot
  output logic                                   mb_start,
  output tl_cmd_t                                mb_cmd,
  input  logic                                   mb_done,
  // tile placement
  output logic [MAX_TILES-1:0]                   active,
  output logic [MAX_TILES-1:0][VER_W-1:0]        version,
  output logic [MAX_TILES-1:0][LOC_W-1:0]        location,
  // events (one-cycle pulses)
  output logic                                   ev_partial,
  output logic                                   ev_full,
  output logic                                   ev_proactive,
  output logic                                   ev_checkpoint,
  output logic                                   ev_reply_timeout,
  output logic                                   ev_ready_timeout,
  output logic                                   ev_mb_timeout,
  output logic                                   ev_log_wrap
);
  localparam int unsigned SW  = $clog2(LOG_DEPTH);
  localparam int unsigned SAW = $clog2(STATE_WORDS);
  localparam int unsigned TW  = (MAX_TILES > 1) ? $clog2(MAX_TILES) : 1;

  typedef enum logic [4:0] {
    C_INIT_WAIT, C_HDR, C_CKPT, C_MB_START, C_MB_GO, C_MB_WAIT, C_RESTORE_WAIT, C_RESTORE,
    C_TILES_WAIT, C_IDLE, C_HASH_REQ, C_HASH_REQ_W, C_WR_REQ, C_POLL, C_POLL_CHK,
    C_RD_REP, C_HASH_REP, C_HASH_REP_W, C_CHECK, C_VOTE, C_LOG, C_HIST1, C_HIST1_W,
    C_HIST2, C_HIST2_W, C_ADV, C_DECIDE, C_REJUV, C_CLEAR, C_CLEAR_W
  } cstate_e;

  // where to go after the header write and after the checkpoint
  typedef enum logic [1:0] {NX_BOOT, NX_TL, NX_CLEAR, NX_DECIDE} next_e;

  cstate_e st;
  next_e   after_hdr, after_ckpt;
  logic    booting;   // bootstrapping: load the configured replica set as is

  // ---------------------------------------------------------------- helpers
  logic         uid_inc, uid_exhausted;
  logic [31:0]  uid;
  uid_counter #(.W(32)) u_uid (.clk, .rst_n, .inc(uid_inc), .uid, .exhausted(uid_exhausted));

  logic         tm_start, tm_stop, tm_running, tm_expired;
  logic [31:0]  tm_limit;
  hq_timer #(.W(32)) u_timer (.clk, .rst_n, .start(tm_start), .stop(tm_stop), .limit(tm_limit),
                              .running(tm_running), .expired(tm_expired));

  logic         sha_start, sha_init, sha_busy, sha_done;
  logic [511:0] sha_block;
  logic [255:0] sha_dig;
  sha256_core u_sha (.clk, .rst_n, .start(sha_start), .init(sha_init), .block(sha_block),
                     .busy(sha_busy), .done(sha_done), .digest(sha_dig));

  logic [MAX_TILES-1:0][255:0] rep_t;
  logic [MAX_TILES-1:0]        got, okv;
  logic [255:0]                best;
  logic [MAX_TILES-1:0]        agree;
  logic [$clog2(MAX_TILES+1)-1:0] best_count;
  logic                        quorum, all_match;
  majority_voter #(.N(MAX_TILES), .DW(256)) u_vote (
    .active, .valid(okv), .data(rep_t), .best, .agree, .best_count, .quorum, .all_match);

  logic                 rj_boot, rj_full;
  logic [MAX_TILES-1:0] rj_trigger;
  cfg_t                 cfg_eff;
  tl_cmd_t              pol_cmd;
  always_comb begin
    cfg_eff = cfg;
    if (booting) begin
      cfg_eff.policy.scale     = 1'b1;
      cfg_eff.policy.diversify = 1'b0;
      cfg_eff.policy.relocate  = 1'b0;
    end
  end
  rejuv_policy u_pol (.cfg(cfg_eff), .boot(rj_boot), .full(rj_full), .trigger(rj_trigger),
                      .cur_active(active), .cur_version(version), .cur_location(location),
                      .cmd(pol_cmd));

  // ---------------------------------------------------------------- state
  logic [SW-1:0]  slot;
  logic [31:0]    log_count;
  logic [255:0]   hist;
  logic [255:0]   req, req_dig, dig_tmp;
  logic [31:0]    tid_tmp;
  logic [TW-1:0]  ti;
  logic [5:0]     k;
  logic           rd_v;
  logic [5:0]     rd_k;
  logic           rj_pending;
  logic [31:0]    pro_cnt;
  logic [TW-1:0]  rr;
  logic           wrapped;

  logic pro_fire;
  assign pro_fire = cfg.policy.proactive && (cfg.proactive_period != '0) &&
                    (pro_cnt >= cfg.proactive_period);

  logic [AW-1:0] base;
  assign base = AW'(slot) * AW'(SLOT_STRIDE);

  function automatic logic [TW-1:0] next_tile(input logic [TW-1:0] t);
    return (32'(t) == MAX_TILES - 1) ? '0 : t + TW'(1);
  endfunction

  // state header word k
  function automatic logic [31:0] hdr_word(input logic [5:0] kk, input logic [31:0] u,
                                           input logic [SW-1:0] s, input logic [31:0] c,
                                           input logic [255:0] h);
    if (kk == 6'(S_NEXT_UID)) return u;
    if (kk == 6'(S_SLOT))     return 32'(s);
    if (kk == 6'(S_COUNT))    return c;
    if (kk >= 6'(S_DIGEST) && kk < 6'(S_DIGEST + 8)) return h[255 - 32*(kk - 6'(S_DIGEST)) -: 32];
    return '0;
  endfunction

  logic all_in;
  assign all_in = &(got | ~active);

  // tiles late with their Ready; next tile for proactive rejuvenation
  logic [MAX_TILES-1:0] late;
  logic [TW-1:0]        pro_tile;
  assign late = active & ~t_ready;
  always_comb begin
    pro_tile = rr;
    for (int i = 0; i < MAX_TILES; i++)
      if (!active[pro_tile]) pro_tile = next_tile(pro_tile);
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    c_en = 1'b0; c_we = 1'b0; c_bank = BANK_STATE; c_addr = '0; c_wdata = '0;
    c_clear = 1'b0; t_clear = 1'b0;
    t_en = '0; t_bank = '{default: BANK_REP}; t_addr = '0;
    ck_en = 1'b0; ck_we = 1'b0; ck_addr = '0; ck_wdata = '0;
    sha_start = 1'b0; sha_init = 1'b1; sha_block = sha_pad256(req);
    q_pop = 1'b0;
    tm_start = 1'b0; tm_stop = 1'b0; tm_limit = '0;
    mb_start = 1'b0;
    uid_inc = 1'b0;
    case (st)
      C_HDR: begin
        c_en = !c_busy; c_we = !c_busy; c_bank = BANK_STATE; c_addr = AW'(k);
        c_wdata = hdr_word(k, uid, slot, log_count, hist);
      end
      C_CKPT: begin
        c_en = (k < 6'(STATE_WORDS)); c_bank = BANK_STATE; c_addr = AW'(k);
        ck_en = rd_v; ck_we = rd_v; ck_addr = SAW'(rd_k); ck_wdata = c_rdata;
      end
      C_MB_GO: begin
        mb_start = 1'b1;
        tm_start = 1'b1; tm_limit = 32'(MB_TIMEOUT);
      end
      C_RESTORE: begin
        // highest word first, next uid last: a tile that sees a non-zero next uid
        // finds the rest of the state in place
        ck_en = (k < 6'(STATE_WORDS)); ck_addr = SAW'(6'(STATE_WORDS - 1) - k);
        c_en = rd_v; c_we = rd_v; c_bank = BANK_STATE;
        c_addr = AW'(6'(STATE_WORDS - 1) - rd_k); c_wdata = ck_rdata;
      end
      C_IDLE: q_pop = q_valid && !uid_exhausted && !pro_fire;
      C_HASH_REQ: sha_start = 1'b1;
      C_WR_REQ: begin
        c_en = 1'b1; c_we = 1'b1; c_bank = BANK_REQ;
        if (k < 6'(MSG_WORDS)) begin
          c_addr = base + AW'(OFF_DATA) + AW'(k);
          c_wdata = req[255 - 32*k -: 32];
        end else if (k < 6'(2*MSG_WORDS)) begin
          c_addr = base + AW'(OFF_DIG) + AW'(k - 6'(MSG_WORDS));
          c_wdata = req_dig[255 - 32*(k - 6'(MSG_WORDS)) -: 32];
        end else begin
          c_addr = base + AW'(OFF_UID);
          c_wdata = uid;
          tm_start = 1'b1; tm_limit = 32'(REPLY_TIMEOUT);
        end
      end
      C_POLL: if (!all_in && !tm_expired && active[ti] && !got[ti]) begin
        t_en[ti] = 1'b1; t_addr[ti] = base + AW'(OFF_UID);
      end
      C_RD_REP: begin
        t_en[ti] = (k < 6'(2*MSG_WORDS + 1));
        t_addr[ti] = base + AW'(OFF_DATA) + AW'(k);
      end
      C_HASH_REP: begin sha_start = 1'b1; sha_block = sha_pad256(rep_t[ti]); end
      C_VOTE: tm_stop = 1'b1;
      C_LOG: begin
        c_en = 1'b1; c_we = 1'b1; c_bank = BANK_REP;
        if (k < 6'(MSG_WORDS)) begin
          c_addr = base + AW'(OFF_DATA) + AW'(k);
          c_wdata = req[255 - 32*k -: 32];
        end else if (k < 6'(2*MSG_WORDS)) begin
          c_addr = base + AW'(OFF_LOG_REP) + AW'(k - 6'(MSG_WORDS));
          c_wdata = best[255 - 32*(k - 6'(MSG_WORDS)) -: 32];
        end else begin
          c_addr = base + AW'(OFF_UID);
          c_wdata = uid;
        end
      end
      C_HIST1: begin sha_start = 1'b1; sha_init = 1'b1; sha_block = {hist, best}; end
      C_HIST2: begin sha_start = 1'b1; sha_init = 1'b0; sha_block = sha_pad512_tail(); end
      C_ADV: uid_inc = 1'b1;
      C_CLEAR: begin c_clear = 1'b1; t_clear = 1'b1; end
      default: ;
    endcase
    if (st == C_RESTORE && k == 6'(STATE_WORDS) && rd_v == 1'b0) begin
      tm_start = 1'b1; tm_limit = 32'(READY_TIMEOUT);
    end
  end

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_INIT_WAIT;
      after_hdr <= NX_BOOT; after_ckpt <= NX_BOOT;
      status <= ST_LOADING;
      rsp_valid <= 1'b0; rsp_uid <= '0; rsp_data <= '0; rsp_status <= RSP_OK;
      mb_cmd <= '0;
      active <= '0;
      for (int i = 0; i < MAX_TILES; i++) begin
        version[i]  <= '0;
        location[i] <= LOC_W'(i);
      end
      slot <= '0; log_count <= '0; hist <= '0;
      req <= '0; req_dig <= '0; dig_tmp <= '0; tid_tmp <= '0;
      rep_t <= '0; got <= '0; okv <= '0;
      ti <= '0; k <= '0; rd_v <= 1'b0; rd_k <= '0;
      rj_boot <= 1'b1; rj_full <= 1'b1; rj_trigger <= '1; rj_pending <= 1'b0;
      booting <= 1'b1;
      pro_cnt <= '0; rr <= '0; wrapped <= 1'b0;
      {ev_partial, ev_full, ev_proactive, ev_checkpoint} <= '0;
      {ev_reply_timeout, ev_ready_timeout, ev_mb_timeout, ev_log_wrap} <= '0;
    end else begin
      rsp_valid <= 1'b0;
      rd_v <= 1'b0;
      {ev_partial, ev_full, ev_proactive, ev_checkpoint} <= '0;
      {ev_reply_timeout, ev_ready_timeout, ev_mb_timeout, ev_log_wrap} <= '0;
      if (status == ST_READY && st == C_IDLE) pro_cnt <= pro_cnt + 32'd1;

      case (st)
        C_INIT_WAIT: if (!c_busy) begin
          for (int i = 0; i < MAX_TILES; i++) version[i] <= cfg.version;
          st <= C_HDR; k <= '0; after_hdr <= NX_BOOT;
        end
        C_HDR: if (!c_busy) begin
          if (k == 6'(STATE_WORDS - 1)) begin
            k <= '0;
            case (after_hdr)
              NX_BOOT:   begin st <= C_CKPT; after_ckpt <= NX_BOOT; end
              default:   st <= C_DECIDE;
            endcase
          end else k <= k + 6'd1;
        end
        C_CKPT: begin
          if (k < 6'(STATE_WORDS)) begin
            rd_v <= 1'b1; rd_k <= k; k <= k + 6'd1;
          end
          if (rd_v && rd_k == 6'(STATE_WORDS - 1)) begin
            ev_checkpoint <= 1'b1;
            k <= '0;
            case (after_ckpt)
              NX_BOOT:  begin
                rj_boot <= 1'b1; rj_full <= 1'b1; rj_trigger <= '1;
                st <= C_MB_START;
              end
              NX_TL:    st <= C_MB_START;
              default:  st <= C_CLEAR;
            endcase
          end
        end
        C_MB_START: begin
          mb_cmd <= pol_cmd;
          st <= C_MB_GO;
        end
        C_MB_GO: st <= C_MB_WAIT;
        C_MB_WAIT: begin
          if (mb_done) begin
            active   <= mb_cmd.active;
            version  <= mb_cmd.version;
            location <= mb_cmd.location;
            if (mb_cmd.boot) begin
              // Bootloader done: now the Tileloader loads the tiles
              rj_boot <= 1'b0; rj_full <= 1'b1; rj_trigger <= '1;
              st <= C_MB_START;
            end else begin
              booting <= 1'b0;
              st <= C_RESTORE_WAIT;
            end
          end else if (tm_expired) begin
            ev_mb_timeout <= 1'b1;
            st <= C_MB_START;
          end
        end
        C_RESTORE_WAIT: if (!c_busy) begin
          st <= C_RESTORE; k <= '0;
        end
        C_RESTORE: begin
          if (k < 6'(STATE_WORDS)) begin
            rd_v <= 1'b1; rd_k <= k; k <= k + 6'd1;
          end else if (!rd_v) begin
            st <= C_TILES_WAIT;
          end
        end
        C_TILES_WAIT: begin
          if ((t_ready & active) == active) begin
            status <= ST_READY;
            rj_pending <= 1'b0;
            pro_cnt <= '0;
            st <= C_IDLE;
          end else if (tm_expired) begin
            ev_ready_timeout <= 1'b1;
            rj_boot <= 1'b0;
            rj_trigger <= late;
            rj_full <= !(popcount(late) * 2 < popcount(active));
            st <= C_REJUV;
          end
        end
        C_IDLE: begin
          if (pro_fire) begin
            // proactive rejuvenation of one tile, round robin over the active set
            rr <= next_tile(pro_tile);
            rj_boot <= 1'b0; rj_full <= 1'b0;
            rj_trigger <= MAX_TILES'(1) << pro_tile;
            ev_proactive <= 1'b1;
            st <= C_REJUV;
          end else if (q_valid && !uid_exhausted) begin
            req <= q_data;
            st <= HASH_EN ? C_HASH_REQ : C_WR_REQ;
            k <= '0;
            if (!HASH_EN) req_dig <= '0;
          end
        end
        C_HASH_REQ: st <= C_HASH_REQ_W;
        C_HASH_REQ_W: if (sha_done) begin
          req_dig <= sha_dig;
          st <= C_WR_REQ; k <= '0;
        end
        C_WR_REQ: begin
          if (k == 6'(2*MSG_WORDS)) begin
            got <= '0; okv <= '0; ti <= '0;
            st <= C_POLL;
          end else k <= k + 6'd1;
        end
        C_POLL: begin
          if (all_in) st <= C_VOTE;
          else if (tm_expired) begin
            ev_reply_timeout <= 1'b1;
            st <= C_VOTE;
          end else if (active[ti] && !got[ti]) st <= C_POLL_CHK;
          else ti <= next_tile(ti);
        end
        C_POLL_CHK: begin
          if (t_rdata[ti] == uid) begin
            st <= C_RD_REP; k <= '0;
          end else begin
            ti <= next_tile(ti);
            st <= C_POLL;
          end
        end
        C_RD_REP: begin
          if (k < 6'(2*MSG_WORDS + 1)) begin
            rd_v <= 1'b1; rd_k <= k; k <= k + 6'd1;
          end
          if (rd_v) begin
            if (rd_k < 6'(MSG_WORDS)) rep_t[ti][255 - 32*rd_k -: 32] <= t_rdata[ti];
            else if (rd_k < 6'(2*MSG_WORDS)) dig_tmp[255 - 32*(rd_k - 6'(MSG_WORDS)) -: 32] <= t_rdata[ti];
            else begin
              tid_tmp <= t_rdata[ti];
              st <= HASH_EN ? C_HASH_REP : C_CHECK;
            end
          end
        end
        C_HASH_REP: st <= C_HASH_REP_W;
        C_HASH_REP_W: if (sha_done) st <= C_CHECK;
        C_CHECK: begin
          got[ti] <= 1'b1;
          okv[ti] <= (tid_tmp == 32'(ti)) && (!HASH_EN || sha_dig == dig_tmp);
          ti <= next_tile(ti);
          st <= C_POLL;
        end
        C_VOTE: begin
          rsp_valid <= 1'b1;
          rsp_uid   <= uid;
          if (quorum) begin
            rsp_data   <= best;
            rsp_status <= all_match ? RSP_OK : RSP_DEGRADED;
            rj_trigger <= active & ~agree;
            rj_full    <= 1'b0;
            rj_pending <= !all_match;
            st <= cfg.stateful ? C_LOG : C_ADV;
          end else begin
            rsp_data   <= '0;
            rsp_status <= RSP_FAIL;
            rj_trigger <= active;
            rj_full    <= 1'b1;
            rj_pending <= 1'b1;
            st <= C_ADV;
          end
          rj_boot <= 1'b0;
          k <= '0;
        end
        C_LOG: begin
          if (k == 6'(2*MSG_WORDS)) st <= C_HIST1;
          else k <= k + 6'd1;
        end
        C_HIST1:   st <= C_HIST1_W;
        C_HIST1_W: if (sha_done) st <= C_HIST2;
        C_HIST2:   st <= C_HIST2_W;
        C_HIST2_W: if (sha_done) begin
          hist <= sha_dig;
          log_count <= log_count + 32'd1;
          st <= C_ADV;
        end
        C_ADV: begin
          wrapped <= (32'(slot) == LOG_DEPTH - 1);
          slot <= (32'(slot) == LOG_DEPTH - 1) ? '0 : slot + SW'(1);
          st <= C_HDR; k <= '0; after_hdr <= NX_DECIDE;
        end
        C_DECIDE: begin
          if (rj_pending) st <= C_REJUV;
          else if (wrapped) begin
            ev_log_wrap <= 1'b1;
            st <= C_CKPT; k <= '0; after_ckpt <= NX_CLEAR;
          end else st <= C_IDLE;
        end
        C_REJUV: begin
          status <= ST_LOADING;
          if (rj_full) ev_full <= 1'b1; else ev_partial <= 1'b1;
          st <= C_CKPT; k <= '0; after_ckpt <= NX_TL;
        end
        C_CLEAR:   st <= C_CLEAR_W;
        C_CLEAR_W: if (!c_busy) begin
          wrapped <= 1'b0;
          st <= C_IDLE;
        end
        default: st <= C_INIT_WAIT;
      endcase
    end
  end

  // A unique ID is never handed out twice.
  a_uid_monotonic: assert property (@(posedge clk) disable iff (!rst_n)
                                    uid_inc && !uid_exhausted |=> uid == $past(uid) + 32'd1);
endmodule
