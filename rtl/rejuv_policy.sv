// rejuv_policy: turns a rejuvenation decision into a Tileloader command,
// following the policy bits of the configuration. Inputs are the tiles to
// rejuvenate (`trigger`), whether the whole compute platform must be reloaded
// (`full`) and the current version, partition and activity of every tile.
//   Refresh / Diversify : a reloaded tile keeps its version, or takes the next one
//                         (modulo NUM_VERSIONS).
//   Replace / Relocate  : a reloaded tile stays in its partition, or moves to the
//                         lowest partition that no other active tile occupies; with
//                         no free partition it stays.
//   Scale-in / out      : with `scale` set the replica set becomes the lowest
//                         2*severity_f+1 tile slots, clamped to [min_tiles,
//                         max_tiles] and to MAX_TILES; newly activated tiles are
//                         loaded too.
// In full mode every active tile is reloaded. Purely combinational.
// The four policy pairs are the platform's; the selection rules (next version,
// lowest free partition, lowest slots) are this design's own.
module rejuv_policy
  import samsara_pkg::*;
(
  input  cfg_t                            cfg,
  input  logic                            boot,
  input  logic                            full,
  input  logic [MAX_TILES-1:0]            trigger,
  input  logic [MAX_TILES-1:0]            cur_active,
  input  logic [MAX_TILES-1:0][VER_W-1:0] cur_version,
  input  logic [MAX_TILES-1:0][LOC_W-1:0] cur_location,
  output tl_cmd_t                         cmd
);
  int unsigned target;
  logic [MAX_TILES-1:0] act, mask;
  logic [NUM_RP-1:0] used;
  logic found;

  always_comb begin
    // scale
    target = 2 * int'(cfg.severity_f) + 1;
    if (target < int'(cfg.min_tiles)) target = int'(cfg.min_tiles);
    if (target > int'(cfg.max_tiles)) target = int'(cfg.max_tiles);
    if (target > MAX_TILES) target = MAX_TILES;
    if (target < 1) target = 1;
    for (int i = 0; i < MAX_TILES; i++)
      act[i] = cfg.policy.scale ? (i < target) : cur_active[i];
    mask = full ? act : ((trigger & act) | (act & ~cur_active));

    found        = 1'b0;
    cmd          = '0;
    cmd.boot     = boot;
    cmd.full     = full;
    cmd.mask     = mask;
    cmd.active   = act;
    cmd.softcore = cfg.softcore;

    // partitions in use by tiles that stay active and are not reloaded
    used = '0;
    for (int i = 0; i < MAX_TILES; i++)
      if (act[i] && !(mask[i] && cfg.policy.relocate)) used[cur_location[i]] = 1'b1;

    for (int i = 0; i < MAX_TILES; i++) begin
      cmd.version[i]  = cur_version[i];
      cmd.location[i] = cur_location[i];
      if (mask[i] && cfg.policy.diversify)
        cmd.version[i] = VER_W'((int'(cur_version[i]) + 1) % NUM_VERSIONS);
      if (mask[i] && cfg.policy.relocate) begin
        // prefer a partition other than the current one
        found = 1'b0;
        for (int p = 0; p < NUM_RP; p++)
          if (!found && !used[p] && p != int'(cur_location[i])) begin
            cmd.location[i] = LOC_W'(p);
            found = 1'b1;
          end
        if (!found) cmd.location[i] = cur_location[i];
        used[cmd.location[i]] = 1'b1;
      end
    end
  end
endmodule
