// tb_sha256_core: checks the SHA-256 engine against published digests.
// Vectors: "abc" (one block), the 448-bit NIST two-block message (chained
// through `init`=0), a 256-bit all-zero message and the 256-bit message
// 00 01 .. 1f (both padded with sha_pad256). It also checks that `done`
// arrives exactly 65 cycles after `start`.
module tb_sha256_core;
  import samsara_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, init = 0, busy, done;
  logic [511:0] block;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [511:0] blk, input logic ini, output int lat);
    @(negedge clk); block = blk; init = ini; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  task automatic expect_dig(input logic [255:0] exp, input string name);
    checks++;
    if (digest !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", name, digest, exp);
    end
  endtask

  int lat;
  logic [255:0] m;
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run({"abc", 1'b1, 423'd0, 64'd24}, 1'b1, lat);
    expect_dig(256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc");
    // lat counts falling edges from the one that raised start: edge 0 samples
    // start, done is high after rising edge 65, i.e. at falling edge 66.
    checks++; if (lat != 66) begin failures++; $display("FAIL latency %0d", lat); end
    run({"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 1'b1, 63'd0}, 1'b1, lat);
    run({448'd0, 64'd448}, 1'b0, lat);
    expect_dig(256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, "two-block");
    run(sha_pad256(256'd0), 1'b1, lat);
    expect_dig(256'h66687aadf862bd776c8fc18b8e9f8e20089714856ee233b3902a591d0d5f2925, "zero256");
    for (int i = 0; i < 32; i++) m[255-8*i -: 8] = 8'(i);
    run(sha_pad256(m), 1'b1, lat);
    expect_dig(256'h630dcd2966c4336691125448bbb25b4ff412a49c732db2c8abc1b8581bd710dd, "seq256");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
