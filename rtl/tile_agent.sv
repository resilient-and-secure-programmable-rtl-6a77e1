// tile_agent: the tile side of the H-Quorum protocol, placed next to a compute
// core (accelerator or softcore) in a reconfigurable partition. It owns the
// tile's PLM-i and has a read-only port on the controller's PLM-C.
//   1. After reset (configuration or reload of the tile) it waits for its PLM to
//      be cleared and for the next-uid word of the PLM-C State BRAM to be
//      non-zero (the controller restores it last), then copies the State BRAM of
//      PLM-C into its own State BRAM;
//      this is the state transfer, and it also tells the tile the next unique ID
//      and slot it must serve. It then raises `ready` to the controller.
//   2. It polls the uid word of the expected slot in the PLM-C Req BRAM. When the
//      expected uid is there it reads the request and its digest, recomputes
//      SHA-256 over the request and accepts it only if both agree (otherwise it
//      pulses `hash_err` and polls again).
//   3. It hands the request to the compute core (`cmp_start`/`cmp_done`).
//   4. It writes the reply, the reply's digest and its tile ID into the slot of
//      its own Rep BRAM, uid word last, and keeps a copy of the request in its
//      own Req BRAM as the local log. Then it moves to the next uid.
// Slot k of a BRAM starts at word k*SLOT_STRIDE; slots wrap after LOG_DEPTH.
// Timing: one PLM read per cycle, one write per cycle, 66 cycles per SHA-256.
// With HASH_EN = 0 no digests are computed or checked (the variant that trusts
// the interconnect) and digest words are written as zero.
// The message fields (uid, req, H(req); uid, rep, H(rep), tid) and the
// protocol steps are the platform's; the polling, slot layout and write order
// are this design's choices.
module tile_agent
  import samsara_pkg::*;
#(
  parameter int unsigned TID       = 0,
  parameter int unsigned LOG_DEPTH = 100,
  parameter bit          HASH_EN   = 1'b1,
  parameter int unsigned AW        = $clog2(LOG_DEPTH * SLOT_STRIDE)
) (
  input  logic           clk,
  input  logic           rst_n,
  // read-only port on PLM-C
  output logic           c_en,
  output bank_e          c_bank,
  output logic [AW-1:0]  c_addr,
  input  logic [31:0]    c_rdata,
  // owner port on PLM-i
  output logic           o_en,
  output logic           o_we,
  output bank_e          o_bank,
  output logic [AW-1:0]  o_addr,
  output logic [31:0]    o_wdata,
  input  logic           o_busy,
  // to the controller
  output logic           ready,
  // compute core
  output logic           cmp_start,
  output logic [255:0]   cmp_req,
  input  logic           cmp_done,
  input  logic [255:0]   cmp_rep,
  // events
  output logic           hash_err,
  output logic           served
);
  localparam int unsigned SW     = $clog2(LOG_DEPTH);
  localparam int unsigned N_WR_P = 2 * MSG_WORDS + 2;  // rep, digest, tid, uid
  localparam int unsigned N_WR   = N_WR_P + MSG_WORDS + 1;

  typedef enum logic [3:0] {
    T_INIT, T_XWAIT, T_XCHK, T_XFER, T_READY, T_POLL, T_POLL_CHK, T_RD, T_HASH, T_HASH_W,
    T_EXEC, T_EXEC_W, T_HASH_REP, T_HASH_REP_W, T_WR
  } tstate_e;
  tstate_e st;

  logic [31:0]   exp_uid;
  logic [SW-1:0] slot;
  logic [5:0]    k;         // issue counter
  logic          rd_v;      // a read issued last cycle
  logic [5:0]    rd_k;      // its index
  logic [255:0]  req, req_dig, rep, rep_dig;

  // SHA-256
  logic         sha_start, sha_busy, sha_done;
  logic [511:0] sha_block;
  logic [255:0] sha_dig;
  sha256_core u_sha (.clk, .rst_n, .start(sha_start), .init(1'b1), .block(sha_block),
                     .busy(sha_busy), .done(sha_done), .digest(sha_dig));

  logic [AW-1:0] base;
  assign base = AW'(slot) * AW'(SLOT_STRIDE);

  // write list: k -> bank, offset, data
  bank_e       wr_bank;
  logic [5:0]  wr_off;
  logic [31:0] wr_data;
  always_comb begin
    wr_bank = BANK_REP;
    wr_off  = '0;
    wr_data = '0;
    if (k < 6'(MSG_WORDS)) begin
      wr_off  = 6'(OFF_DATA) + k;
      wr_data = rep[255 - 32*k -: 32];
    end else if (k < 6'(2*MSG_WORDS)) begin
      wr_off  = 6'(OFF_DIG) + k - 6'(MSG_WORDS);
      wr_data = rep_dig[255 - 32*(k - 6'(MSG_WORDS)) -: 32];
    end else if (k == 6'(2*MSG_WORDS)) begin
      wr_off  = 6'(OFF_TID);
      wr_data = 32'(TID);
    end else if (k == 6'(2*MSG_WORDS + 1)) begin
      wr_off  = 6'(OFF_UID);
      wr_data = exp_uid;
    end else if (k < 6'(N_WR - 1)) begin
      wr_bank = BANK_REQ;
      wr_off  = 6'(OFF_DATA) + k - 6'(N_WR_P);
      wr_data = req[255 - 32*(k - 6'(N_WR_P)) -: 32];
    end else begin
      wr_bank = BANK_REQ;
      wr_off  = 6'(OFF_UID);
      wr_data = exp_uid;
    end
  end

  always_comb begin
    c_en      = 1'b0;
    c_bank    = BANK_REQ;
    c_addr    = '0;
    o_en      = 1'b0;
    o_we      = 1'b0;
    o_bank    = BANK_STATE;
    o_addr    = '0;
    o_wdata   = '0;
    sha_start = 1'b0;
    sha_block = sha_pad256(req);
    cmp_start = 1'b0;
    cmp_req   = req;
    case (st)
      T_XWAIT: begin
        c_en   = 1'b1;
        c_bank = BANK_STATE;
        c_addr = AW'(S_NEXT_UID);
      end
      T_XFER: begin
        c_en   = (k < 6'(STATE_WORDS));
        c_bank = BANK_STATE;
        c_addr = AW'(k);
        o_en    = rd_v;
        o_we    = rd_v;
        o_bank  = BANK_STATE;
        o_addr  = AW'(rd_k);
        o_wdata = c_rdata;
      end
      T_POLL: begin
        c_en   = 1'b1;
        c_addr = base + AW'(OFF_UID);
      end
      T_RD: begin
        c_en   = (k < 6'(2*MSG_WORDS));
        c_addr = base + AW'(OFF_DATA) + AW'(k);
      end
      T_HASH:     sha_start = 1'b1;
      T_EXEC:     cmp_start = 1'b1;
      T_HASH_REP: begin
        sha_start = 1'b1;
        sha_block = sha_pad256(rep);
      end
      T_WR: begin
        o_en    = !o_busy;
        o_we    = !o_busy;
        o_bank  = wr_bank;
        o_addr  = base + AW'(wr_off);
        o_wdata = wr_data;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= T_INIT;
      exp_uid  <= 32'd1;
      slot     <= '0;
      k        <= '0;
      rd_v     <= 1'b0;
      rd_k     <= '0;
      ready    <= 1'b0;
      req      <= '0;
      req_dig  <= '0;
      rep      <= '0;
      rep_dig  <= '0;
      hash_err <= 1'b0;
      served   <= 1'b0;
    end else begin
      hash_err <= 1'b0;
      served   <= 1'b0;
      rd_v     <= 1'b0;
      case (st)
        T_INIT: if (!o_busy) st <= T_XWAIT;
        T_XWAIT: st <= T_XCHK;
        T_XCHK: begin
          // the controller writes the next uid last; zero means not restored yet
          st <= (c_rdata != '0) ? T_XFER : T_XWAIT;
          k  <= '0;
        end
        T_XFER: begin
          if (k < 6'(STATE_WORDS)) begin
            rd_v <= 1'b1;
            rd_k <= k;
            k    <= k + 6'd1;
          end
          if (rd_v) begin
            if (rd_k == 6'(S_NEXT_UID)) exp_uid <= c_rdata;
            if (rd_k == 6'(S_SLOT))     slot    <= SW'(c_rdata);
            if (rd_k == 6'(STATE_WORDS - 1)) st <= T_READY;
          end
        end
        T_READY: begin
          ready <= 1'b1;
          st    <= T_POLL;
        end
        T_POLL: st <= T_POLL_CHK;
        T_POLL_CHK: begin
          if (c_rdata == exp_uid) begin
            st <= T_RD;
            k  <= '0;
          end else begin
            st <= T_POLL;
          end
        end
        T_RD: begin
          if (k < 6'(2*MSG_WORDS)) begin
            rd_v <= 1'b1;
            rd_k <= k;
            k    <= k + 6'd1;
          end
          if (rd_v) begin
            if (rd_k < 6'(MSG_WORDS)) req[255 - 32*rd_k -: 32] <= c_rdata;
            else req_dig[255 - 32*(rd_k - 6'(MSG_WORDS)) -: 32] <= c_rdata;
            if (rd_k == 6'(2*MSG_WORDS - 1)) st <= HASH_EN ? T_HASH : T_EXEC;
          end
        end
        T_HASH:   st <= T_HASH_W;
        T_HASH_W: if (sha_done) begin
          if (sha_dig == req_dig) begin
            st <= T_EXEC;
          end else begin
            hash_err <= 1'b1;
            st       <= T_POLL;
          end
        end
        T_EXEC:   st <= T_EXEC_W;
        T_EXEC_W: if (cmp_done) begin
          rep <= cmp_rep;
          st  <= HASH_EN ? T_HASH_REP : T_WR;
          k   <= '0;
          if (!HASH_EN) rep_dig <= '0;
        end
        T_HASH_REP:   st <= T_HASH_REP_W;
        T_HASH_REP_W: if (sha_done) begin
          rep_dig <= sha_dig;
          st      <= T_WR;
          k       <= '0;
        end
        T_WR: if (!o_busy) begin
          if (k == 6'(N_WR - 1)) begin
            served  <= 1'b1;
            exp_uid <= exp_uid + 32'd1;
            slot    <= (32'(slot) == LOG_DEPTH - 1) ? '0 : slot + SW'(1);
            st      <= T_POLL;
          end else begin
            k <= k + 6'd1;
          end
        end
        default: st <= T_INIT;
      endcase
    end
  end
endmodule
