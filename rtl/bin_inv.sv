// BIA / BINV: binary inversion algorithm, r = z^-1 mod M (paper Alg. 3).
//
// Keeps u, v, x, y with the invariants x*z = u and y*z = v (mod M), starting from
// u = z, v = M, x = 1, y = 0. Each clock cycle performs one step of the algorithm:
//   u even: u >>= 1 and x halved mod M ((x + M) >> 1 when x is odd);
//   else v even: the same on v and y;
//   else u >= v: u -= v, x -= y mod M; else v -= u, y -= x mod M.
// The loop ends when u = 0; the result is x mod M if u = 1, otherwise y mod M (as the
// paper writes it; with the u = 0 exit it is y, since v then holds gcd = 1).
// z = 0 gives r = 0. z may exceed M (it is reduced by the first subtraction).
//
// Interface: start pulse with z; done pulses one cycle with r valid until the next start.
// Timing: data dependent, at most about 2 * 256 * 2 cycles; typically about 700 cycles.
// The algorithm is the paper's; one step per cycle is this design's choice. MODULUS is the
// SECP256K1 prime p inside SECP256K1 and the group order n inside ECDSA.
module bin_inv
  import ethvault_pkg::*;
#(
  parameter logic [255:0] MODULUS = SECP_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] z,
  output logic         busy,
  output logic         done,
  output logic [255:0] r
);

  localparam logic [257:0] M = {2'b00, MODULUS};

  logic [256:0] u_q, v_q;
  logic [257:0] x_q, y_q;
  logic         fin_q;

  function automatic logic [257:0] half(input logic [257:0] a);
    return a[0] ? ((a + M) >> 1) : (a >> 1);
  endfunction

  function automatic logic [257:0] reduce(input logic [257:0] a);
    logic [257:0] t;
    t = a;
    if (t >= M) t = t - M;
    if (t >= M) t = t - M;
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_q   <= '0;
      v_q   <= '0;
      x_q   <= '0;
      y_q   <= '0;
      r     <= '0;
      busy  <= 1'b0;
      fin_q <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        u_q   <= {1'b0, z};
        v_q   <= {1'b0, MODULUS};
        x_q   <= 258'd1;
        y_q   <= '0;
        busy  <= 1'b1;
        fin_q <= 1'b0;
      end else if (busy && !fin_q) begin
        if (u_q == '0) fin_q <= 1'b1;
        else if (!u_q[0]) begin
          u_q <= u_q >> 1;
          x_q <= half(x_q);
        end else if (!v_q[0]) begin
          v_q <= v_q >> 1;
          y_q <= half(y_q);
        end else if (u_q >= v_q) begin
          u_q <= u_q - v_q;
          x_q <= (x_q > y_q) ? (x_q - y_q) : (x_q + M - y_q);
        end else begin
          v_q <= v_q - u_q;
          y_q <= (y_q > x_q) ? (y_q - x_q) : (y_q + M - x_q);
        end
      end else if (busy) begin
        logic [257:0] res;
        res  = (u_q == 257'd1) ? reduce(x_q) : reduce(y_q);
        r    <= res[255:0];
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
