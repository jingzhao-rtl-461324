// tb_sha256_core: hashes single-block messages with sha256_core and compares the digests
// with published test vectors ("abc" and the empty message) and with a behavioural
// reference written from the standard's equations for random messages of 0..55 bytes.
// Also checks that done comes exactly 64 clocks after start.
`timescale 1ns/1ps
module tb_sha256_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [511:0] block;
  logic [255:0] digest;
  sha256_core dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // padded single block of an n-byte message
  function automatic logic [511:0] pad(input logic [7:0] m [56], input int n);
    logic [511:0] b;
    b = '0;
    for (int i = 0; i < n; i++) b[511 - 8*i -: 8] = m[i];
    b[511 - 8*n -: 8] = 8'h80;
    b[63:0] = 64'(8 * n);
    return b;
  endfunction

  // behavioural reference (plain loop over the 64 rounds with a full 64-word schedule)
  function automatic logic [31:0] rr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [255:0] ref_sha(input logic [511:0] blk);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] hh [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                            32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    logic [31:0] ww [64];
    logic [31:0] v [8];
    logic [31:0] x1, x2;
    for (int i = 0; i < 16; i++) ww[i] = blk[511 - 32*i -: 32];
    for (int i = 16; i < 64; i++)
      ww[i] = (rr(ww[i-2], 17) ^ rr(ww[i-2], 19) ^ (ww[i-2] >> 10)) + ww[i-7] +
              (rr(ww[i-15], 7) ^ rr(ww[i-15], 18) ^ (ww[i-15] >> 3)) + ww[i-16];
    for (int i = 0; i < 8; i++) v[i] = hh[i];
    for (int i = 0; i < 64; i++) begin
      x1 = v[7] + (rr(v[4], 6) ^ rr(v[4], 11) ^ rr(v[4], 25)) + ((v[4] & v[5]) ^ (~v[4] & v[6])) + k[i] + ww[i];
      x2 = (rr(v[0], 2) ^ rr(v[0], 13) ^ rr(v[0], 22)) + ((v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]));
      v[7] = v[6]; v[6] = v[5]; v[5] = v[4]; v[4] = v[3] + x1;
      v[3] = v[2]; v[2] = v[1]; v[1] = v[0]; v[0] = x1 + x2;
    end
    return {hh[0] + v[0], hh[1] + v[1], hh[2] + v[2], hh[3] + v[3],
            hh[4] + v[4], hh[5] + v[5], hh[6] + v[6], hh[7] + v[7]};
  endfunction

  task automatic hash(input logic [511:0] b, output logic [255:0] d);
    int t;
    start = 1; block = b;
    @(posedge clk); #1;
    start = 0;
    t = 0;
    while (!done) begin @(posedge clk); #1; t++; end
    check(t == 64, $sformatf("digest 64 clocks after start (got %0d)", t));
    d = digest;
  endtask

  initial begin
    logic [7:0] m [56];
    logic [255:0] d;
    int n;
    start = 0; block = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    m[0] = "a"; m[1] = "b"; m[2] = "c";
    hash(pad(m, 3), d);
    check(d == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "SHA-256(\"abc\")");
    hash(pad(m, 0), d);
    check(d == 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "SHA-256(\"\")");
    for (int t = 0; t < 300; t++) begin
      n = $urandom % 56;
      for (int i = 0; i < 56; i++) m[i] = 8'($urandom);
      hash(pad(m, n), d);
      check(d == ref_sha(pad(m, n)), $sformatf("random message of %0d bytes", n));
      repeat ($urandom % 3) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
