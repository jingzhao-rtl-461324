// tb_kv_hash_scaling: service rate of the key-value core against its number of hash cores.
// Six client/server pairs of key_value_core run side by side, the servers with 1, 2, 4,
// 8, 16 and 32 SHA-256 cores. Each client first SETs a few keys, then sends a burst of
// back-to-back GETs over them; every answer must be a hit with the value set. The rate
// of answers over the burst, measured over whole rounds of N answers after the first N
// (when all cores have started), must follow min(N/64, link limit) per clock: each request
// and answer is two 64-byte beats on its link, so the link caps the rate at 1/2 per clock,
// above every tested N. At 200 MHz, N/64 per clock is 3.125 Mops/s per core.
`timescale 1ns/1ps
module tb_kv_hash_scaling;
  import jz_pkg::*;
  localparam int NCFG = 6;
  localparam int NH [NCFG] = '{1, 2, 4, 8, 16, 32};
  localparam int KB = 24, NKEY = 6;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

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

  logic [NCFG-1:0] done;
  real rate [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    logic req_valid, req_ready, req_set, res_valid, res_ready;
    logic [5:0] req_key_len, res_key_len;
    logic [8*KB-1:0] req_key, res_key;
    logic [255:0] req_value, res_value;
    logic [7:0] res_op;
    logic c_out_valid, c_out_ready, s_out_valid, s_out_ready;
    beat_t c_out_beat, s_out_beat;
    logic [31:0] cs [6], ss [6];

    key_value_core #(.NHASH(1)) u_client (
      .clk, .rst_n, .req_valid, .req_ready, .req_set, .req_key_len, .req_key, .req_value,
      .req_dst_mac(48'h02_00_00_00_00_01), .res_valid, .res_ready, .res_op, .res_key_len,
      .res_key, .res_value,
      .out_valid(c_out_valid), .out_ready(c_out_ready), .out_beat(c_out_beat),
      .in_valid(s_out_valid), .in_ready(s_out_ready), .in_beat(s_out_beat),
      .stat_req_tx(cs[0]), .stat_req_rx(cs[1]), .stat_hits(cs[2]), .stat_misses(cs[3]),
      .stat_sets(cs[4]), .stat_bad(cs[5]));
    logic s_res_valid;
    logic [7:0] s_res_op;
    logic [5:0] s_res_key_len;
    logic [8*KB-1:0] s_res_key;
    logic [255:0] s_res_value;
    key_value_core #(.NHASH(NH[g])) u_server (
      .clk, .rst_n, .req_valid(1'b0), .req_ready(), .req_set(1'b0), .req_key_len(6'd0),
      .req_key('0), .req_value('0), .req_dst_mac(48'h0), .res_valid(s_res_valid),
      .res_ready(1'b1), .res_op(s_res_op), .res_key_len(s_res_key_len), .res_key(s_res_key),
      .res_value(s_res_value),
      .out_valid(s_out_valid), .out_ready(s_out_ready), .out_beat(s_out_beat),
      .in_valid(c_out_valid), .in_ready(c_out_ready), .in_beat(c_out_beat),
      .stat_req_tx(ss[0]), .stat_req_rx(ss[1]), .stat_hits(ss[2]), .stat_misses(ss[3]),
      .stat_sets(ss[4]), .stat_bad(ss[5]));

    logic [255:0] val [NKEY];
    int got = 0, nburst, span;
    longint t_first = -1, t_last = 0;
    assign res_ready = 1'b1;
    always @(posedge clk) if (rst_n && s_res_valid) check(0, "server got an answer it never asked for");

    task automatic send(input bit set, input int k, input logic [255:0] v);
      req_valid = 1; req_set = set; req_key = '0;
      req_key[31:0] = 32'h6b65_7930 + 32'(k);  // "0yek" + k: four key bytes
      req_key[39:32] = 8'(g);
      req_key_len = 6'd5; req_value = v;
      do begin @(negedge clk); #2; end while (!req_ready);
      @(posedge clk); #1;
      req_valid = 0;
    endtask

    initial begin
      int k;
      done[g] = 0;
      req_valid = 0; req_set = 0; req_key = '0; req_key_len = '0; req_value = '0;
      nburst = 24 + 6 * NH[g];
      span = ((nburst - 2 * NH[g]) / NH[g]) * NH[g];   // whole rounds of N answers
      wait (rst_n);
      @(posedge clk); #1;
      for (int i = 0; i < NKEY; i++) begin
        val[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        send(1, i, val[i]);
      end
      wait (got == NKEY);
      for (int i = 0; i < nburst; i++) send(0, $urandom % NKEY, '0);
      wait (got == NKEY + nburst);
      rate[g] = real'(span) / (real'(t_last - t_first) / 5.0);
      done[g] = 1;
    end

    int exp_k [$];
    always @(negedge clk) begin
      #1;
      if (rst_n && res_valid) begin
        got++;
        if (got > NKEY) begin
          logic [2:0] k;
          k = 3'(res_key[31:0] - 32'h6b65_7930);
          check(res_op == 8'h81 && res_value == val[k], $sformatf("%0d cores: answer %0d is a hit with the set value", NH[g], got));
          if (got == NKEY + NH[g] + 1) t_first = $time;
          if (got == NKEY + NH[g] + 1 + span) t_last = $time;
        end else check(res_op == 8'h83, "SET acknowledged");
      end
    end
  end

  initial begin
    repeat (4) @(posedge clk); rst_n = 1;
    wait (&done);
    for (int g = 0; g < NCFG; g++) begin
      real ideal;
      ideal = NH[g] / 64.0 < 0.5 ? NH[g] / 64.0 : 0.5;
      $display("%2d hash cores: %0.4f answers per clock (%0.2f Mops/s at 200 MHz), ideal %0.4f",
               NH[g], rate[g], rate[g] * 200.0, ideal);
      check(rate[g] > 0.9 * NH[g] / 66.0 && rate[g] <= ideal * 1.02, $sformatf("%0d cores: rate follows N/64", NH[g]));
      if (g > 0) check(rate[g] > 1.8 * rate[g-1], $sformatf("rate doubles from %0d to %0d cores", NH[g-1], NH[g]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
