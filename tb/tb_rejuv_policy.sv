// tb_rejuv_policy: directed cases for each policy pair (Refresh/Diversify,
// Replace/Relocate, Scale-in/out) in partial and full mode, followed by random
// configurations checked against structural rules: the reloaded mask is a
// subset of the new active set, kept tiles keep version and partition, active
// tiles never share a partition when a free one exists, and the active set has
// the clamped 2f+1 size when scaling.
module tb_rejuv_policy;
  import samsara_pkg::*;
  cfg_t cfg;
  logic boot, full;
  logic [MAX_TILES-1:0] trigger, cur_active;
  logic [MAX_TILES-1:0][VER_W-1:0] cur_version;
  logic [MAX_TILES-1:0][LOC_W-1:0] cur_location;
  tl_cmd_t cmd;
  rejuv_policy dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_cmd(input string name, input logic [2:0] mask, input logic [2:0] act,
                            input logic [2:0] ver, input logic [5:0] loc);
    #1;
    checks++;
    if (cmd.mask != mask || cmd.active != act || cmd.version != ver || cmd.location != loc) begin
      failures++;
      $display("FAIL %s: mask=%b act=%b ver=%b loc=%h", name, cmd.mask, cmd.active, cmd.version, cmd.location);
    end
  endtask
  initial begin
    cfg = '0; cfg.min_tiles = 3'd1; cfg.max_tiles = 3'd3; cfg.severity_f = 2'd1; cfg.softcore = 4'h5;
    boot = 0; full = 0;
    cur_active = 3'b111; cur_version = 3'b000; cur_location = {2'd2, 2'd1, 2'd0};
    trigger = 3'b100;
    expect_cmd("refresh/replace", 3'b100, 3'b111, 3'b000, {2'd2, 2'd1, 2'd0});
    cfg.policy.diversify = 1;
    expect_cmd("diversify", 3'b100, 3'b111, 3'b100, {2'd2, 2'd1, 2'd0});
    full = 1;
    expect_cmd("diversify full", 3'b111, 3'b111, 3'b111, {2'd2, 2'd1, 2'd0});
    checks++; if (!(cmd.full && cmd.softcore == 4'h5)) failures++;
    full = 0; cfg.policy.diversify = 0;
    // relocate with a free partition: tile 0 alone active at partition 0
    cfg.policy.relocate = 1; cur_active = 3'b001; trigger = 3'b001;
    expect_cmd("relocate", 3'b001, 3'b001, 3'b000, {2'd2, 2'd1, 2'd1});
    // relocate with no free partition: stays
    cur_active = 3'b111; trigger = 3'b010;
    expect_cmd("relocate none free", 3'b010, 3'b111, 3'b000, {2'd2, 2'd1, 2'd0});
    cfg.policy.relocate = 0;
    // scale-in to one tile (f = 0)
    cfg.policy.scale = 1; cfg.severity_f = 2'd0; trigger = 3'b000;
    expect_cmd("scale-in", 3'b000, 3'b001, 3'b000, {2'd2, 2'd1, 2'd0});
    // scale-out from one tile to three: tiles 1 and 2 are loaded
    cfg.severity_f = 2'd1; cur_active = 3'b001;
    expect_cmd("scale-out", 3'b110, 3'b111, 3'b000, {2'd2, 2'd1, 2'd0});
    // min/max clamps
    cfg.severity_f = 2'd3; cfg.max_tiles = 3'd2;
    expect_cmd("max clamp", 3'b010, 3'b011, 3'b000, {2'd2, 2'd1, 2'd0});
    cfg.severity_f = 2'd0; cfg.min_tiles = 3'd3; cfg.max_tiles = 3'd3;
    expect_cmd("min clamp", 3'b110, 3'b111, 3'b000, {2'd2, 2'd1, 2'd0});

    for (int n = 0; n < 3000; n++) begin
      int na, target;
      bit ok;
      cfg = cfg_t'({$urandom, $urandom});
      boot = 1'($urandom); full = 1'($urandom);
      trigger = 3'($urandom); cur_active = 3'($urandom); cur_version = 3'($urandom);
      // distinct partitions, as after any earlier command
      case ($urandom % 6)
        0: cur_location = {2'd2, 2'd1, 2'd0}; 1: cur_location = {2'd1, 2'd2, 2'd0};
        2: cur_location = {2'd2, 2'd0, 2'd1}; 3: cur_location = {2'd0, 2'd2, 2'd1};
        4: cur_location = {2'd1, 2'd0, 2'd2}; default: cur_location = {2'd0, 2'd1, 2'd2};
      endcase
      #1;
      ok = 1;
      if ((cmd.mask & ~cmd.active) != 0) ok = 0;
      if (cmd.boot != boot || cmd.full != full) ok = 0;
      if (!cfg.policy.scale && cmd.active != cur_active) ok = 0;
      if (full && cmd.mask != cmd.active) ok = 0;
      if (!full && cmd.mask != ((trigger & cmd.active) | (cmd.active & ~cur_active))) ok = 0;
      if (cfg.policy.scale) begin
        target = 2 * cfg.severity_f + 1;
        if (target < cfg.min_tiles) target = cfg.min_tiles;
        if (target > cfg.max_tiles) target = cfg.max_tiles;
        if (target > 3) target = 3;
        if (target < 1) target = 1;
        na = 0; for (int i = 0; i < 3; i++) na += cmd.active[i];
        if (na != target) ok = 0;
      end
      for (int i = 0; i < 3; i++) begin
        if (!cmd.mask[i] && (cmd.version[i] != cur_version[i] || cmd.location[i] != cur_location[i])) ok = 0;
        if (cmd.mask[i] && cfg.policy.diversify && cmd.version[i] == cur_version[i]) ok = 0;
        if (cmd.mask[i] && !cfg.policy.diversify && cmd.version[i] != cur_version[i]) ok = 0;
        if (cmd.mask[i] && !cfg.policy.relocate && cmd.location[i] != cur_location[i]) ok = 0;
        for (int j = 0; j < i; j++)
          if (cmd.active[i] && cmd.active[j] && cmd.location[i] == cmd.location[j]) ok = 0;
      end
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL random cfg=%h full=%b trig=%b act=%b loc=%h -> mask=%b act=%b ver=%b loc=%h",
                 cfg, full, trigger, cur_active, cur_location, cmd.mask, cmd.active, cmd.version, cmd.location);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
