// sha256_core: SHA-256 compression of one 512-bit block, one round per clock (Hash).
//
// start loads a message block that is already padded (FIPS 180-4 padding) and the initial
// hash value; the core then runs the 64 rounds, one per clock, computing the message
// schedule on the fly in a 16-word window, and adds the working variables back to the
// initial value. done pulses with the 256-bit digest 64 clocks after start; busy is high
// in between and start is ignored while busy. Only single-block messages are handled
// (a key of at most 55 bytes), which is what the key-value core needs.
// Interface: block[511:480] is message word 0 (the first four message bytes, big-endian);
// digest[255:224] is H0. The 64-clock latency per hash is the reference design's figure;
// the round-per-clock datapath is the standard one.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
  localparam logic [255:0] H_INIT = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                     32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] w [16];          // w[0] is the word used in the current round
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [5:0]  round;

  // round function
  logic [31:0] s0, s1, ch, maj, t1, t2, ws0, ws1, w_next;
  always_comb begin
    s1     = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch     = (e & f) ^ (~e & g);
    t1     = h + s1 + ch + K[round] + w[0];
    s0     = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj    = (a & b) ^ (a & c) ^ (b & c);
    t2     = s0 + maj;
    ws0    = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ws1    = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    w_next = ws1 + w[9] + ws0 + w[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      digest <= '0;
      round  <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          round <= '0;
          {a, b, c, d, e, f, g, h} <= H_INIT;
          for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
        end
      end else begin
        {a, b, c, d, e, f, g, h} <= {t1 + t2, a, b, c, d + t1, e, f, g};
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_next;
        round <= round + 1'b1;
        if (round == 6'd63) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          digest <= {H_INIT[255:224] + t1 + t2, H_INIT[223:192] + a, H_INIT[191:160] + b,
                     H_INIT[159:128] + c, H_INIT[127:96] + d + t1, H_INIT[95:64] + e,
                     H_INIT[63:32] + f, H_INIT[31:0] + g};
        end
      end
    end
  end
endmodule
