// tb_tile_agent: one tile agent (TID 2, four log slots) against a PLM-C model
// kept in the testbench, a capture of its own PLM writes and a compute core that
// returns the bitwise complement of the request after a few cycles. Checks:
//   - no Ready while the next-uid state word is still zero (state not restored);
//   - the state transfer copies all State words and starts at the restored uid
//     and slot;
//   - a request with the right digest is executed once, and the reply, its
//     SHA-256 digest, the tile ID and the uid land in the tile's Rep BRAM, with
//     the request logged in its Req BRAM;
//   - a request whose digest is wrong is refused (hash_err, no execution) until
//     the digest is corrected;
//   - the slot index wraps after the last log slot;
//   - writes wait while the PLM is busy.
module tb_tile_agent;
  import samsara_pkg::*;
  localparam int LOG_DEPTH = 4, AW = $clog2(LOG_DEPTH * SLOT_STRIDE), TID = 2;
  localparam int DEPTH = LOG_DEPTH * SLOT_STRIDE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic c_en; bank_e c_bank; logic [AW-1:0] c_addr; logic [31:0] c_rdata;
  logic o_en, o_we; bank_e o_bank; logic [AW-1:0] o_addr; logic [31:0] o_wdata; logic o_busy;
  logic ready, cmp_start, cmp_done, hash_err, served;
  logic [255:0] cmp_req, cmp_rep;
  tile_agent #(.TID(TID), .LOG_DEPTH(LOG_DEPTH), .HASH_EN(1'b1)) dut (.*);

  // PLM-C model (controller side) and own-PLM capture
  logic [31:0] cm [3][DEPTH];
  logic [31:0] om [3][DEPTH];
  bit busy_rand = 0;
  always_ff @(posedge clk) begin
    if (c_en) c_rdata <= cm[int'(c_bank)][c_addr];
    if (o_en && o_we && !o_busy) om[int'(o_bank)][o_addr] <= o_wdata;
  end
  always_ff @(posedge clk) o_busy <= !rst_n || (busy_rand && ($urandom % 4 == 0));
  int n_exec = 0, n_hash_err = 0, n_served = 0, busy_write_attempts = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmp_start) n_exec++;
    if (hash_err) n_hash_err++;
    if (served) n_served++;
  end
  // compute core: ~req after 5 cycles
  initial begin
    cmp_done = 0; cmp_rep = '0;
    forever begin
      @(posedge clk);
      if (cmp_start) begin
        repeat (5) @(posedge clk);
        cmp_rep <= ~cmp_req; cmp_done <= 1;
        @(posedge clk); cmp_done <= 0;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string name);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", name); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_req(input int slot, input logic [31:0] uid, input logic [255:0] d, input logic [255:0] h);
    int b = slot * SLOT_STRIDE;
    for (int i = 0; i < MSG_WORDS; i++) begin
      cm[0][b + OFF_DATA + i] = d[255 - 32*i -: 32];
      cm[0][b + OFF_DIG + i]  = h[255 - 32*i -: 32];
    end
    cm[0][b + OFF_UID] = uid;
  endtask
  task automatic chk_rep(input int slot, input logic [31:0] uid, input logic [255:0] d,
                         input logic [255:0] h, input logic [255:0] req, input string name);
    int b = slot * SLOT_STRIDE; bit ok = 1;
    for (int i = 0; i < MSG_WORDS; i++) begin
      if (om[1][b + OFF_DATA + i] != d[255 - 32*i -: 32]) ok = 0;
      if (om[1][b + OFF_DIG + i]  != h[255 - 32*i -: 32]) ok = 0;
      if (om[0][b + OFF_DATA + i] != req[255 - 32*i -: 32]) ok = 0;
    end
    chk(ok, {name, ": reply, digest and log words"});
    chk(om[1][b + OFF_TID] == 32'(TID), {name, ": tile id"});
    chk(om[1][b + OFF_UID] == uid && om[0][b + OFF_UID] == uid, {name, ": uid"});
  endtask
  task automatic wait_served(input int limit);
    int n = 0, s0 = n_served;
    while (n_served == s0 && n < limit) begin @(negedge clk); n++; end
  endtask

  localparam logic [255:0] REQ1 = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
  localparam logic [255:0] H_REQ1 = 256'h630dcd2966c4336691125448bbb25b4ff412a49c732db2c8abc1b8581bd710dd;
  localparam logic [255:0] H_REP1 = 256'h1865c00831e73f7ee23fc13cb2d0f588b9c341835ca7472f8ec035aba4b789d6;
  localparam logic [255:0] H_REQ0 = 256'h66687aadf862bd776c8fc18b8e9f8e20089714856ee233b3902a591d0d5f2925;
  localparam logic [255:0] H_REP0 = 256'haf9613760f72635fbdb44a5a0a63c39f12af30f950a6ee5c971be188e89c4051;

  initial begin
    for (int b = 0; b < 3; b++) for (int i = 0; i < DEPTH; i++) begin cm[b][i] = '0; om[b][i] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (60) @(negedge clk);
    chk(!ready, "no Ready before the state is restored");
    // restore the state, next uid last
    for (int i = STATE_WORDS - 1; i > S_NEXT_UID; i--) cm[2][i] = 32'hc0de_0000 + 32'(i);
    cm[2][S_SLOT] = 32'd3;
    cm[2][S_NEXT_UID] = 32'd5;
    begin int n = 0; while (!ready && n < 200) begin @(negedge clk); n++; end end
    chk(ready, "Ready after state transfer");
    begin bit ok = 1; for (int i = 0; i < STATE_WORDS; i++) if (om[2][i] != cm[2][i]) ok = 0;
      chk(ok, "state copied"); end
    busy_rand = 1;
    // request uid 5 in slot 3
    put_req(3, 32'd5, REQ1, H_REQ1);
    wait_served(2000);
    repeat (2) @(negedge clk);
    chk(n_served == 1 && n_exec == 1, "first request served once");
    chk_rep(3, 32'd5, ~REQ1, H_REP1, REQ1, "uid 5");
    // uid 6 wraps to slot 0, first with a corrupted digest
    put_req(0, 32'd6, '0, 256'h1);
    begin int n = 0; while (n_hash_err == 0 && n < 500) begin @(negedge clk); n++; end end
    repeat (300) @(negedge clk);
    chk(n_hash_err >= 1, "corrupted digest detected");
    chk(n_exec == 1 && n_served == 1, "corrupted request not executed");
    put_req(0, 32'd6, '0, H_REQ0);
    wait_served(2000);
    repeat (2) @(negedge clk);
    chk(n_served == 2 && n_exec == 2, "corrected request served");
    chk_rep(0, 32'd6, ~256'h0, H_REP0, '0, "uid 6");
    // the same uid again is not served twice; the agent now waits for uid 7 in slot 1
    repeat (300) @(negedge clk);
    chk(n_served == 2, "no duplicate service");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
