// sha1_core: one-block SHA-1 (FIPS 180-4) from the standard initial value.
//
// The caller hands in one padded 512-bit block (first message byte in bits
// 511:504) with a one-cycle start pulse; every message of the hash-tree scheme
// is hash(tmp || sibling), 40 bytes, so one block always suffices. The core
// runs one of the 80 rounds per clock, keeping the message schedule in a
// 16-word window that shifts each round, and adds the initial value in one
// more cycle. It then waits until LATENCY cycles have passed since start and
// pulses done; digest stays valid until the next start.
//
// Timing: start sampled at clock edge 0, done is high after edge LATENCY.
// LATENCY defaults to the 175 cycles per SHA-1 that the paper reports for its
// unoptimised core; the paper does not describe that core's insides, so the
// round-per-clock engine and the idle cycles that pad it to 175 are this
// design's choices. LATENCY below 81 is raised to 81.
module sha1_core #(
  parameter int unsigned LATENCY = 175
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [159:0] digest
);

  localparam int unsigned LAT = (LATENCY < 81) ? 81 : LATENCY;
  localparam logic [159:0] IV = 160'h67452301_EFCDAB89_98BADCFE_10325476_C3D2E1F0;

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e;
  logic [7:0]  round;      // 0..79 rounds, 80 = final add
  logic [15:0] cnt;        // cycles since start
  logic        rounds_on;

  logic [31:0] wt, f, k, t;

  always_comb begin
    if (round < 8'd16) wt = w[0];
    else begin
      wt = w[13] ^ w[8] ^ w[2] ^ w[0];
      wt = {wt[30:0], wt[31]};
    end
    if (round < 8'd20) begin
      f = (b & c) | (~b & d);       k = 32'h5A827999;
    end else if (round < 8'd40) begin
      f = b ^ c ^ d;                k = 32'h6ED9EBA1;
    end else if (round < 8'd60) begin
      f = (b & c) | (b & d) | (c & d); k = 32'h8F1BBCDC;
    end else begin
      f = b ^ c ^ d;                k = 32'hCA62C1D6;
    end
    t = {a[26:0], a[31:27]} + f + e + k + wt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) w[i] <= '0;
      {a, b, c, d, e} <= '0;
      round     <= '0;
      cnt       <= '0;
      rounds_on <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      digest    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int i = 0; i < 16; i++) w[i] <= block[511-32*i -: 32];
        {a, b, c, d, e} <= IV;
        round     <= '0;
        cnt       <= 16'd1;
        rounds_on <= 1'b1;
        busy      <= 1'b1;
      end else if (busy) begin
        cnt <= cnt + 16'd1;
        if (rounds_on) begin
          if (round < 8'd80) begin
            for (int i = 0; i < 15; i++) w[i] <= w[i+1];
            w[15] <= wt;
            e <= d;
            d <= c;
            c <= {b[1:0], b[31:2]};
            b <= a;
            a <= t;
            round <= round + 8'd1;
          end else begin
            digest <= {a + IV[159:128], b + IV[127:96], c + IV[95:64],
                       d + IV[63:32],   e + IV[31:0]};
            rounds_on <= 1'b0;
          end
        end
        if (cnt == 16'(LAT)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
