// majority_voter: the agreement check of the controller. It receives one reply
// per tile, a `valid` bit (the reply arrived in time with the right uid, tile ID
// and digest) and the mask of tiles in the replica set. For every valid reply it
// counts how many valid replies are equal to it, and picks the reply with the
// highest count (the lowest tile index wins a tie). With n active tiles, n = 2f+1:
//   all_match : every active tile returned the chosen reply
//   quorum    : at least f+1 = n/2+1 tiles returned it (the reply may be delivered)
//   agree     : the tiles that returned it; the others are faulty or slow.
// Purely combinational.
// The all / f+1 / fewer-than-f+1 classes are the platform's; bitwise comparison,
// deriving f from the active-tile count and the tie rule are this design's.
module majority_voter #(
  parameter int unsigned N  = 3,
  parameter int unsigned DW = 256
) (
  input  logic [N-1:0]         active,
  input  logic [N-1:0]         valid,
  input  logic [N-1:0][DW-1:0] data,
  output logic [DW-1:0]        best,
  output logic [N-1:0]         agree,
  output logic [$clog2(N+1)-1:0] best_count,
  output logic                 quorum,
  output logic                 all_match
);
  localparam int unsigned CW = $clog2(N+1);
  logic [N-1:0] ok;
  logic [CW-1:0] n_active;
  logic [N-1:0][CW-1:0] cnt;
  int unsigned sel;

  always_comb begin
    ok = valid & active;
    n_active = '0;
    for (int i = 0; i < N; i++) n_active += CW'(active[i]);
    for (int i = 0; i < N; i++) begin
      cnt[i] = '0;
      for (int j = 0; j < N; j++)
        if (ok[i] && ok[j] && data[i] == data[j]) cnt[i] += CW'(1);
    end
    sel = 0;
    for (int i = 1; i < N; i++)
      if (cnt[i] > cnt[sel]) sel = i;
    best       = data[sel];
    best_count = cnt[sel];
    for (int j = 0; j < N; j++)
      agree[j] = ok[j] && (cnt[sel] != '0) && (data[j] == data[sel]);
    quorum    = (n_active != '0) && (best_count >= (n_active >> 1) + CW'(1));
    all_match = (n_active != '0) && (best_count == n_active);
  end
endmodule
