// mpboot_model: behavioural model of MP-Boot, the small processor that runs the
// Bootloader and Tileloader software on the controller's command. Not
// synthesizable logic. On an `mb_start` pulse it reads the command:
//   boot        : waits BOOT_CYCLES, then pulses `done` (main bitstream loaded);
//   full-mode   : holds the whole PL in reset for LOAD_CYCLES, then pulses `done`;
//   partial-mode: holds the tiles in `cmd.mask` in reset for LOAD_CYCLES, then
//                 pulses `done`.
// Test knobs: `ignore_next` makes it drop the next command (an unresponsive
// MP-Boot); tiles in `stuck_mask` stay in reset STUCK_CYCLES longer than the
// rest, so they are late with their Ready.
module mpboot_model
  import samsara_pkg::*;
#(
  parameter int BOOT_CYCLES  = 30,
  parameter int LOAD_CYCLES  = 20,
  parameter int STUCK_CYCLES = 5000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  tl_cmd_t              cmd,
  output logic                 done,
  output logic                 pl_full_rst_n,
  output logic [MAX_TILES-1:0] tile_rst_n,
  input  logic                 ignore_next,
  input  logic [MAX_TILES-1:0] stuck_mask,
  output int                   n_cmds
);
  int full_cnt;
  int tile_cnt [MAX_TILES];
  int done_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; pl_full_rst_n <= 1'b1; tile_rst_n <= '1;
      full_cnt <= 0; done_cnt <= 0; n_cmds <= 0;
      for (int i = 0; i < MAX_TILES; i++) tile_cnt[i] <= 0;
    end else begin
      done <= 1'b0;
      if (start && !ignore_next) begin
        n_cmds <= n_cmds + 1;
        if (cmd.boot) done_cnt <= BOOT_CYCLES;
        else begin
          done_cnt <= LOAD_CYCLES + 2;
          if (cmd.full) begin
            full_cnt <= LOAD_CYCLES;
            pl_full_rst_n <= 1'b0;
          end
          for (int i = 0; i < MAX_TILES; i++)
            if (cmd.mask[i] || cmd.full) begin
              tile_cnt[i]   <= LOAD_CYCLES + (stuck_mask[i] ? STUCK_CYCLES : 0);
              tile_rst_n[i] <= 1'b0;
            end
        end
      end else begin
        if (done_cnt > 0) begin
          done_cnt <= done_cnt - 1;
          if (done_cnt == 1) done <= 1'b1;
        end
        if (full_cnt > 0) begin
          full_cnt <= full_cnt - 1;
          if (full_cnt == 1) pl_full_rst_n <= 1'b1;
        end
        for (int i = 0; i < MAX_TILES; i++)
          if (tile_cnt[i] > 0) begin
            tile_cnt[i] <= tile_cnt[i] - 1;
            if (tile_cnt[i] == 1) tile_rst_n[i] <= 1'b1;
          end
      end
    end
  end
endmodule
