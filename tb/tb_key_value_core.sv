// tb_key_value_core: two key_value_core instances joined back to back by a link that
// stalls at random; each is client of the other and server for the other. Every client
// issues random GET and SET requests over a small key pool so hits, misses, overwrites
// and slot collisions all occur. A behavioural SHA-256 and a direct-mapped store model
// predict each response, which must come back in request order with the right op and
// value. Afterwards a burst of back-to-back GETs measures the service rate of the
// NHASH hash cores, which must be close to NHASH hashes per 64 clocks, and the
// counters of both cores are checked against the number of requests and outcomes.
`timescale 1ns/1ps
module tb_key_value_core;
  import jz_pkg::*;
  localparam int KB = 24, VW = 256, NH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          req_valid [2], req_ready [2], req_set [2];
  logic [5:0]    req_key_len [2];
  logic [8*KB-1:0] req_key [2];
  logic [VW-1:0] req_value [2];
  logic          res_valid [2], res_ready [2];
  logic [7:0]    res_op [2];
  logic [5:0]    res_key_len [2];
  logic [8*KB-1:0] res_key [2];
  logic [VW-1:0] res_value [2];
  logic          out_valid [2], out_ready [2], in_valid [2], in_ready [2];
  beat_t         out_beat [2], in_beat [2];
  logic [31:0]   s_tx [2], s_rx [2], s_hit [2], s_miss [2], s_set [2], s_bad [2];
  logic          go [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    key_value_core #(.NHASH(NH), .KEY_BYTES(KB), .MAC(48'h02_00_00_00_00_10 + n)) dut (
      .clk, .rst_n,
      .req_valid(req_valid[n]), .req_ready(req_ready[n]), .req_set(req_set[n]),
      .req_key_len(req_key_len[n]), .req_key(req_key[n]), .req_value(req_value[n]),
      .req_dst_mac(48'h02_00_00_00_00_10 + 48'(1 - n)),
      .res_valid(res_valid[n]), .res_ready(res_ready[n]), .res_op(res_op[n]),
      .res_key_len(res_key_len[n]), .res_key(res_key[n]), .res_value(res_value[n]),
      .out_valid(out_valid[n]), .out_ready(out_ready[n]), .out_beat(out_beat[n]),
      .in_valid(in_valid[n]), .in_ready(in_ready[n]), .in_beat(in_beat[n]),
      .stat_req_tx(s_tx[n]), .stat_req_rx(s_rx[n]), .stat_hits(s_hit[n]),
      .stat_misses(s_miss[n]), .stat_sets(s_set[n]), .stat_bad(s_bad[n]));
    // link from node n to node 1-n
    assign in_valid[1-n]  = out_valid[n] && go[n];
    assign in_beat[1-n]   = out_beat[n];
    assign out_ready[n]   = in_ready[1-n] && go[n];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- reference SHA-256 (one block) ----------
  function automatic logic [31:0] rr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [63:0] ref_hash(input logic [8*KB-1:0] key, input int len);
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
    logic [7:0]  msg [64];
    logic [31:0] ww [64];
    logic [31:0] v [8];
    logic [31:0] x1, x2;
    for (int i = 0; i < 64; i++) msg[i] = 0;
    for (int i = 0; i < len; i++) msg[i] = key[8*i +: 8];
    msg[len] = 8'h80;
    msg[62] = 8'((8 * len) >> 8);
    msg[63] = 8'(8 * len);
    for (int i = 0; i < 16; i++) ww[i] = {msg[4*i], msg[4*i+1], msg[4*i+2], msg[4*i+3]};
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
    return {hh[0] + v[0], hh[1] + v[1]};
  endfunction

  // ---------- key pool and store models (one per server) ----------
  localparam int NKEYS = 40;
  logic [8*KB-1:0] pool_key [NKEYS];
  int              pool_len [NKEYS];
  logic [63:0]     pool_hash [NKEYS];
  logic [VW-1:0]   st_val [2][int];    // server n: slot -> value
  logic [53:0]     st_tag [2][int];    // server n: slot -> tag
  typedef struct { logic [7:0] op; logic [VW-1:0] value; int key; } exp_t;
  exp_t exp_q [2][$];
  int n_hit [2], n_miss [2], n_set [2], n_req [2];

  // client c sends to server 1-c; the model of server 1-c is updated at issue time
  task automatic issue(input int c, input bit set, input int key, input logic [VW-1:0] val);
    int srv = 1 - c;
    int slot = int'(pool_hash[key][9:0]);
    logic [53:0] tag = pool_hash[key][63:10];
    exp_t e;
    e.key = key;
    if (set) begin
      e.op = 8'h83; e.value = val;
      st_val[srv][slot] = val; st_tag[srv][slot] = tag; n_set[srv]++;
    end else if (st_tag[srv].exists(slot) && st_tag[srv][slot] == tag) begin
      e.op = 8'h81; e.value = st_val[srv][slot]; n_hit[srv]++;
    end else begin
      e.op = 8'h82; e.value = '0; n_miss[srv]++;
    end
    n_req[srv]++;
    exp_q[c].push_back(e);
    req_valid[c] = 1; req_set[c] = set; req_key[c] = pool_key[key];
    req_key_len[c] = 6'(pool_len[key]); req_value[c] = val;
    do begin @(negedge clk); #2; end while (!req_ready[c]);
    @(posedge clk); #1;
    req_valid[c] = 0;
  endtask

  // result checkers
  bit stall_res = 1;
  int got [2];
  longint t_first, t_last;
  for (genvar n = 0; n < 2; n++) begin : g_chk
    always @(negedge clk) begin
      exp_t e;
      res_ready[n] = stall_res ? ($urandom % 4 != 0) : 1'b1;
      #1;
      if (rst_n && res_valid[n] && res_ready[n]) begin
        if (exp_q[n].size() == 0) check(0, $sformatf("node %0d: unexpected result", n));
        else begin
          e = exp_q[n].pop_front();
          check(res_op[n] == e.op && res_value[n] == e.value &&
                res_key[n] == pool_key[e.key] && int'(res_key_len[n]) == pool_len[e.key],
                $sformatf("node %0d result %0d: op %h/%h key %0d", n, got[n], res_op[n], e.op, e.key));
        end
        got[n]++;
        if (n == 0) begin
          if (t_first < 0) t_first = $time;
          t_last = $time;
        end
      end
    end
  end

  always @(negedge clk) begin
    go[0] = stall_res ? ($urandom % 5 != 0) : 1'b1;
    go[1] = stall_res ? ($urandom % 5 != 0) : 1'b1;
  end

  task automatic client(input int c, input int nreq);
    for (int t = 0; t < nreq; t++) begin
      bit set = ($urandom % 3) == 0;
      issue(c, set, $urandom % NKEYS, {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      repeat ($urandom % 4) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    int got0_before, nburst;
    real rate;
    for (int n = 0; n < 2; n++) begin
      req_valid[n] = 0; req_set[n] = 0; req_key[n] = '0; req_key_len[n] = '0; req_value[n] = '0;
      got[n] = 0;
    end
    t_first = -1;
    // key pool: random lengths 0..KB, two keys are prefixes of each other, one is empty
    for (int i = 0; i < NKEYS; i++) begin
      pool_len[i] = (i == 0) ? 0 : 1 + $urandom % KB;
      pool_key[i] = '0;
      for (int b = 0; b < pool_len[i]; b++) pool_key[i][8*b +: 8] = 8'($urandom);
    end
    pool_len[2] = (pool_len[1] > 1) ? pool_len[1] - 1 : 1;
    pool_key[2] = '0;
    for (int b = 0; b < pool_len[2]; b++) pool_key[2][8*b +: 8] = pool_key[1][8*b +: 8];
    for (int i = 0; i < NKEYS; i++) pool_hash[i] = ref_hash(pool_key[i], pool_len[i]);

    repeat (4) @(posedge clk); rst_n = 1; #1;
    fork
      client(0, 300);
      client(1, 300);
    join
    wait (exp_q[0].size() == 0 && exp_q[1].size() == 0);
    @(posedge clk); #1;

    // burst of GETs from node 0, no stalls: service rate of the hash cores
    stall_res = 0;
    repeat (5) @(posedge clk); #1;
    got0_before = got[0];
    t_first = -1;
    nburst = 160;
    for (int t = 0; t < nburst; t++) issue(0, 0, $urandom % NKEYS, '0);
    wait (exp_q[0].size() == 0);
    @(posedge clk); #1;
    rate = real'(nburst - 1) / (real'(t_last - t_first) / 10.0);
    $display("GET service rate with %0d hash cores: %0.3f per clock (%0d cores / 64 clocks = %0.3f)",
             NH, rate, NH, NH / 64.0);
    check(got[0] - got0_before == nburst, "all burst GETs answered");
    check(rate > 0.85 * NH / 66.0 && rate <= NH / 64.0 + 0.01, "service rate follows the number of hash cores");

    for (int n = 0; n < 2; n++) begin
      check(s_tx[n] == 32'(n_req[1-n]), $sformatf("node %0d request counter", n));
      check(s_rx[n] == 32'(n_req[n]), $sformatf("node %0d received request counter", n));
      check(s_hit[n] == 32'(n_hit[n]) && s_miss[n] == 32'(n_miss[n]) && s_set[n] == 32'(n_set[n]),
            $sformatf("node %0d hit %0d/%0d miss %0d/%0d set %0d/%0d", n, s_hit[n], n_hit[n],
                      s_miss[n], n_miss[n], s_set[n], n_set[n]));
      check(s_bad[n] == 0, "no malformed packets");
      check(n_hit[n] > 20 && n_miss[n] > 20 && n_set[n] > 20, "hits, misses and sets all exercised");
    end
    $display("node0: hits %0d misses %0d sets %0d; node1: hits %0d misses %0d sets %0d",
             s_hit[0], s_miss[0], s_set[0], s_hit[1], s_miss[1], s_set[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
