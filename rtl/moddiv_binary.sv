// moddiv_binary: modular division q = x / y mod m (x times the inverse of y).
//
// TPM_Increment_Hash divides the old factor out of the aggregate PCR. The
// paper uses a binary division algorithm for this, slower than its
// multiplier, but does not list it; this block implements the binary
// extended-Euclid division. It keeps u, v, x1, x2 with the invariants
// x1*y = u*x and x2*y = v*x (mod m), starting from u = y, v = m, x1 = x,
// x2 = 0, and takes one step per clock:
//   u == 1 : q = x1, stop          v == 1 : q = x2, stop
//   u even : u = u/2, x1 = x1/2 mod m   (x1 odd: (x1+m)/2)
//   v even : v = v/2, x2 = x2/2 mod m
//   u > v  : u = u - v, x1 = x1 - x2 mod m
//   else   : v = v - u, x2 = x2 - x1 mod m
// Before the loop x and y are reduced by one conditional subtraction (enough
// for m > 2^(K-1)). y = 0 mod m has no inverse: div_by_zero is raised with
// done and q = 0.
//
// Interface: start captures x, y, m when idle; done pulses with q valid.
// Timing: data dependent, 4 cycles plus one per loop step, at most 4*K
// steps, about 2.1*K (some 1070 for K = 512) on random operands. The paper's
// divider takes 1563 cycles; this design does not try to match that number.
// m must be an odd prime.
module moddiv_binary #(
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
  output logic [K-1:0] q,
  output logic         div_by_zero
);

  typedef enum logic [2:0] {S_IDLE, S_REDX, S_REDY, S_CHK, S_LOOP} state_e;
  state_e state;

  logic [K-1:0] u, v, x1, x2, mr;

  // x/2 mod m for x < m, m odd
  function automatic logic [K-1:0] half_mod(logic [K-1:0] a, logic [K-1:0] mod);
    logic [K:0] s;
    s = a[0] ? ({1'b0, a} + {1'b0, mod}) : {1'b0, a};
    return s[K:1];
  endfunction

  // a - b mod m for a, b < m
  function automatic logic [K-1:0] sub_mod(logic [K-1:0] a, logic [K-1:0] b,
                                           logic [K-1:0] mod);
    return (a >= b) ? (a - b) : (a - b + mod);
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      {u, v, x1, x2, mr} <= '0;
      done        <= 1'b0;
      q           <= '0;
      div_by_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x1    <= x;
          u     <= y;
          mr    <= m;
          state <= S_REDX;
        end
        S_REDX: begin
          if (x1 >= mr) x1 <= x1 - mr;
          state <= S_REDY;
        end
        S_REDY: begin
          if (u >= mr) u <= u - mr;
          v     <= mr;
          x2    <= '0;
          state <= S_CHK;
        end
        S_CHK: begin
          if (u == '0) begin
            q           <= '0;
            div_by_zero <= 1'b1;
            done        <= 1'b1;
            state       <= S_IDLE;
          end else begin
            div_by_zero <= 1'b0;
            state       <= S_LOOP;
          end
        end
        S_LOOP: begin
          if (u == K'(1)) begin
            q     <= x1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (v == K'(1)) begin
            q     <= x2;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (!u[0]) begin
            u  <= u >> 1;
            x1 <= half_mod(x1, mr);
          end else if (!v[0]) begin
            v  <= v >> 1;
            x2 <= half_mod(x2, mr);
          end else if (u > v) begin
            u  <= u - v;
            x1 <= sub_mod(x1, x2, mr);
          end else begin
            v  <= v - u;
            x2 <= sub_mod(x2, x1, mr);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
