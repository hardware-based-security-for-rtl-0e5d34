// modmul_interleaved: modular multiplication p = x*y mod m, shift and add.
//
// The incremental-hash scheme multiplies SHA-512 values into a 512-bit PCR
// modulo a prime. The paper uses the interleaved (shift-and-add) method
// rather than Montgomery multiplication, because the operands change every
// time and Montgomery's conversions would not pay off. Scanning x from its
// most significant bit, each bit costs four clock steps on a (K+1)-bit
// accumulator:
//   1. p = 2p            2. if p >= m: p = p - m
//   3. if x[j]: p = p+y  4. if p >= m: p = p - m
// so p < m holds after every bit. Before the loop x and y are reduced once
// (one conditional subtraction, which is enough when m > 2^(K-1)), p is
// cleared, and after the loop the result is registered: 4*K + 4 cycles in
// all, 2052 for K = 512, one fewer than the 2053 the paper reports. The
// split into single-step cycles is this design's; the paper names only the
// algorithm and its source.
//
// Interface: start (sampled when idle) captures x, y, m; done pulses for one
// cycle with p valid (held until the next start). Timing: start at edge 0,
// done high after edge 4*K+4. Requires odd m with m > 2^(K-1).
module modmul_interleaved #(
  parameter int unsigned K = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [K-1:0] x,
  input  logic [K-1:0] y,
  input  logic [K-1:0] m,
  output logic         busy,
  output logic         done,
  output logic [K-1:0] p
);

  localparam int unsigned BW = $clog2(K);

  typedef enum logic [2:0] {S_IDLE, S_REDX, S_REDY, S_CLR, S_STEP, S_OUT} state_e;
  state_e state;

  logic [K-1:0]  xr, yr, mr;
  logic [K:0]    acc;
  logic [1:0]    phase;
  logic [BW-1:0] bit_idx;

  logic [K:0] acc_dbl, acc_sub, acc_add;
  logic       acc_ge;
  assign acc_dbl = {acc[K-1:0], 1'b0};
  assign acc_ge  = acc >= {1'b0, mr};
  assign acc_sub = acc - {1'b0, mr};
  assign acc_add = acc + {1'b0, yr};

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      xr      <= '0;
      yr      <= '0;
      mr      <= '0;
      acc     <= '0;
      phase   <= '0;
      bit_idx <= '0;
      done    <= 1'b0;
      p       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xr    <= x;
          yr    <= y;
          mr    <= m;
          state <= S_REDX;
        end
        S_REDX: begin
          if (xr >= mr) xr <= xr - mr;
          state <= S_REDY;
        end
        S_REDY: begin
          if (yr >= mr) yr <= yr - mr;
          state <= S_CLR;
        end
        S_CLR: begin
          acc     <= '0;
          phase   <= 2'd0;
          bit_idx <= BW'(K - 1);
          state   <= S_STEP;
        end
        S_STEP: begin
          phase <= phase + 2'd1;
          unique case (phase)
            2'd0: acc <= acc_dbl;
            2'd1: if (acc_ge) acc <= acc_sub;
            2'd2: if (xr[bit_idx]) acc <= acc_add;
            2'd3: begin
              if (acc_ge) acc <= acc_sub;
              if (bit_idx == '0) state <= S_OUT;
              else bit_idx <= bit_idx - BW'(1);
            end
          endcase
        end
        S_OUT: begin
          p     <= acc[K-1:0];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
