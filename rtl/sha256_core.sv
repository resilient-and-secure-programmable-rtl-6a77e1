// sha256_core: SHA-256 compression engine (FIPS 180-4), one round per clock.
//
// Each tile and the controller carry one of these to digest requests, replies and
// the state history. A pulse on `start` loads a 512-bit block; with `init` high the
// chaining value starts from the standard IV, otherwise it continues from the
// digest of the previous block, so multi-block messages are hashed by issuing the
// blocks one after another. The message schedule is a 16-word shift register.
// Timing: start in cycle 0, rounds in cycles 1..64, `done` pulses in cycle 65 with
// `digest` valid from then until the next start. `busy` is high in between.
// Padding is left to the caller (see samsara_pkg::sha_pad256).
// The hash function is the one the platform names; the round-per-cycle structure
// is this design's own choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         init,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  import samsara_pkg::*;

  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [255:0] hin;
  logic [6:0] round;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] s0, s1, ch, maj, t1, t2, ws0, ws1, wnext;
  always_comb begin
    s1    = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch    = (e & f) ^ (~e & g);
    t1    = h + s1 + ch + K[round[5:0]] + w[0];
    s0    = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj   = (a & b) ^ (a & c) ^ (b & c);
    t2    = s0 + maj;
    ws0   = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ws1   = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wnext = w[0] + ws0 + w[9] + ws1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      round  <= '0;
      digest <= SHA256_IV;
      hin    <= SHA256_IV;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        logic [255:0] hv;
        hv = init ? SHA256_IV : digest;
        hin <= hv;
        {a, b, c, d, e, f, g, h} <= hv;
        for (int i = 0; i < 16; i++) w[i] <= block[511-32*i -: 32];
        round <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (round == 7'd64) begin
          digest <= {hin[255:224] + a, hin[223:192] + b, hin[191:160] + c, hin[159:128] + d,
                     hin[127:96] + e, hin[95:64] + f, hin[63:32] + g, hin[31:0] + h};
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          {a, b, c, d, e, f, g, h} <= {t1 + t2, a, b, c, d + t1, e, f, g};
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wnext;
          round <= round + 7'd1;
        end
      end
    end
  end

endmodule
