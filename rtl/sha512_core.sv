// sha512_core: one-block SHA-512 (FIPS 180-4) from the standard initial value.
//
// The incremental-hash scheme needs a hash as wide as its 512-bit modulus; the
// paper uses SHA-512 for this and reports 81 cycles per hash. Its longest
// message, i || vPCR_new || PCR_i, is 88 bytes and pads into one 128-byte
// block, so this core hashes a single padded block (first byte in bits
// 1023:1016). It runs one round per clock with the message schedule in a
// 16-word window, then adds the initial value in an 81st cycle.
//
// Interface and timing: start is sampled at clock edge 0; done pulses high
// after edge 81 together with a valid digest, which is held until the next
// start. The round-per-clock structure is this design's choice; the paper gives
// only the algorithm and the cycle count, which this core matches.
module sha512_core (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1023:0] block,
  output logic          busy,
  output logic          done,
  output logic [511:0]  digest
);

  // Round constants: first 64 bits of the fractional parts of the cube roots
  // of the first 80 primes.
  localparam logic [63:0] K [80] = '{
    64'h428A2F98D728AE22,
    64'h7137449123EF65CD,
    64'hB5C0FBCFEC4D3B2F,
    64'hE9B5DBA58189DBBC,
    64'h3956C25BF348B538,
    64'h59F111F1B605D019,
    64'h923F82A4AF194F9B,
    64'hAB1C5ED5DA6D8118,
    64'hD807AA98A3030242,
    64'h12835B0145706FBE,
    64'h243185BE4EE4B28C,
    64'h550C7DC3D5FFB4E2,
    64'h72BE5D74F27B896F,
    64'h80DEB1FE3B1696B1,
    64'h9BDC06A725C71235,
    64'hC19BF174CF692694,
    64'hE49B69C19EF14AD2,
    64'hEFBE4786384F25E3,
    64'h0FC19DC68B8CD5B5,
    64'h240CA1CC77AC9C65,
    64'h2DE92C6F592B0275,
    64'h4A7484AA6EA6E483,
    64'h5CB0A9DCBD41FBD4,
    64'h76F988DA831153B5,
    64'h983E5152EE66DFAB,
    64'hA831C66D2DB43210,
    64'hB00327C898FB213F,
    64'hBF597FC7BEEF0EE4,
    64'hC6E00BF33DA88FC2,
    64'hD5A79147930AA725,
    64'h06CA6351E003826F,
    64'h142929670A0E6E70,
    64'h27B70A8546D22FFC,
    64'h2E1B21385C26C926,
    64'h4D2C6DFC5AC42AED,
    64'h53380D139D95B3DF,
    64'h650A73548BAF63DE,
    64'h766A0ABB3C77B2A8,
    64'h81C2C92E47EDAEE6,
    64'h92722C851482353B,
    64'hA2BFE8A14CF10364,
    64'hA81A664BBC423001,
    64'hC24B8B70D0F89791,
    64'hC76C51A30654BE30,
    64'hD192E819D6EF5218,
    64'hD69906245565A910,
    64'hF40E35855771202A,
    64'h106AA07032BBD1B8,
    64'h19A4C116B8D2D0C8,
    64'h1E376C085141AB53,
    64'h2748774CDF8EEB99,
    64'h34B0BCB5E19B48A8,
    64'h391C0CB3C5C95A63,
    64'h4ED8AA4AE3418ACB,
    64'h5B9CCA4F7763E373,
    64'h682E6FF3D6B2B8A3,
    64'h748F82EE5DEFB2FC,
    64'h78A5636F43172F60,
    64'h84C87814A1F0AB72,
    64'h8CC702081A6439EC,
    64'h90BEFFFA23631E28,
    64'hA4506CEBDE82BDE9,
    64'hBEF9A3F7B2C67915,
    64'hC67178F2E372532B,
    64'hCA273ECEEA26619C,
    64'hD186B8C721C0C207,
    64'hEADA7DD6CDE0EB1E,
    64'hF57D4F7FEE6ED178,
    64'h06F067AA72176FBA,
    64'h0A637DC5A2C898A6,
    64'h113F9804BEF90DAE,
    64'h1B710B35131C471B,
    64'h28DB77F523047D84,
    64'h32CAAB7B40C72493,
    64'h3C9EBE0A15C9BEBC,
    64'h431D67C49C100D4C,
    64'h4CC5D4BECB3E42B6,
    64'h597F299CFC657E2A,
    64'h5FCB6FAB3AD6FAEC,
    64'h6C44198C4A475817
  };

  localparam logic [511:0] IV = {
    64'h6A09E667F3BCC908, 64'hBB67AE8584CAA73B, 64'h3C6EF372FE94F82B,
    64'hA54FF53A5F1D36F1, 64'h510E527FADE682D1, 64'h9B05688C2B3E6C1F,
    64'h1F83D9ABFB41BD6B, 64'h5BE0CD19137E2179};

  function automatic logic [63:0] rotr(logic [63:0] x, int unsigned n);
    return (x >> n) | (x << (64 - n));
  endfunction

  logic [63:0] w [16];
  logic [63:0] a, b, c, d, e, f, g, h;
  logic [6:0]  round;   // 0..79 rounds, 80 = final add

  logic [63:0] wt, s0, s1, ch, maj, t1, t2, ws0, ws1;

  always_comb begin
    ws0 = rotr(w[1], 1) ^ rotr(w[1], 8) ^ (w[1] >> 7);
    ws1 = rotr(w[14], 19) ^ rotr(w[14], 61) ^ (w[14] >> 6);
    wt  = (round < 7'd16) ? w[0] : (ws1 + w[9] + ws0 + w[0]);
    s1  = rotr(e, 14) ^ rotr(e, 18) ^ rotr(e, 41);
    ch  = (e & f) ^ (~e & g);
    s0  = rotr(a, 28) ^ rotr(a, 34) ^ rotr(a, 39);
    maj = (a & b) ^ (a & c) ^ (b & c);
    t1  = h + s1 + ch + K[(round < 7'd80) ? round : 7'd0] + wt;
    t2  = s0 + maj;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) w[i] <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      round  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      digest <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int i = 0; i < 16; i++) w[i] <= block[1023-64*i -: 64];
        {a, b, c, d, e, f, g, h} <= IV;
        round <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (round < 7'd80) begin
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wt;
          h <= g;
          g <= f;
          f <= e;
          e <= d + t1;
          d <= c;
          c <= b;
          b <= a;
          a <= t1 + t2;
          round <= round + 7'd1;
        end else begin
          digest <= {a + IV[511:448], b + IV[447:384], c + IV[383:320], d + IV[319:256],
                     e + IV[255:192], f + IV[191:128], g + IV[127:64],  h + IV[63:0]};
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
