// SECP256K1: side-channel-hardened scalar point multiplication R = k * G.
//
// Montgomery ladder with a temporary register Rt (paper Alg. 6) on two PA units that run
// in parallel, followed by the binary inversion (BIA) back to affine coordinates.
// Each of the 256 ladder steps, for key bit k_i from the most significant bit down, has
// two phases of one PA time each:
//   phase A: PA0 computes S = R0 + R1 while PA1 computes D = 2 * R_{k_i}
//            (k_i = 1: R0 <- S, R1 <- D;  k_i = 0: R1 <- S, R0 <- D);
//   phase B: PA0 computes Rt = 2 * S, the dummy doubling of Alg. 6 (k_i = 1: 2*R0,
//            k_i = 0: 2*R1, both equal to 2*S after phase A); the result is not used.
// Every step therefore performs one addition and two doublings on both working registers
// whatever k_i, and the complete addition formula has no data-dependent branch, so the
// sequence and number of cycles do not depend on the key.
// After the ladder, BIA computes Z^-1 of R0 and one MALU forms x = X Z^-1, y = Y Z^-1.
//
// Interface: start pulse with k (256-bit scalar, any value); done pulses one cycle with
// pub = {x, y} (512 bits) valid until the next start and inf = 1 when k * G is the point at
// infinity (k = 0 mod n), in which case pub = 0.
// Timing: 256 * 2 * 3651 cycles for the ladder, then the data-dependent inversion
// (~500-1000 cycles) and two multiplications: about 1,870,900 cycles, 0.9% below the
// paper's 1,887,520.
// Differences from the paper: the ladder starts from R0 = O = (0:1:0), R1 = G and runs
// all 256 bits, instead of R0 = P, R1 = 2P with a leading 1 bit, so that every key takes
// the same number of steps; and BIA uses its own registers instead of reusing R1 and Rt.
module secp256k1
  import ethvault_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] k,
  output logic         busy,
  output logic         done,
  output logic [511:0] pub,
  output logic         inf
);

  typedef enum logic [2:0] {S_IDLE, S_PHA, S_PHB, S_INV, S_MX, S_MY} state_e;
  state_e state_q;

  logic [767:0] r0_q, r1_q, rt_q;   // projective {X, Y, Z}
  logic [255:0] k_q, zinv_q, x_q;
  logic [7:0]   i_q;
  logic         go_q;               // one-cycle launch of the current phase

  // PA units
  logic         pa0_done, pa1_done, pa0_busy, pa1_busy;
  logic [767:0] pa0_a, pa0_b, pa1_in, pa0_out, pa1_out;
  logic         kbit, pa0_ok_q, pa1_ok_q;

  assign kbit   = k_q[255];
  assign pa0_a  = (state_q == S_PHB) ? rt_q : r0_q;
  assign pa0_b  = (state_q == S_PHB) ? rt_q : r1_q;
  assign pa1_in = kbit ? r1_q : r0_q;

  point_add u_pa0 (.clk, .rst_n, .start(go_q && (state_q == S_PHA || state_q == S_PHB)),
                   .p1(pa0_a), .p2(pa0_b), .busy(pa0_busy), .done(pa0_done), .p3(pa0_out));
  point_add u_pa1 (.clk, .rst_n, .start(go_q && state_q == S_PHA),
                   .p1(pa1_in), .p2(pa1_in), .busy(pa1_busy), .done(pa1_done), .p3(pa1_out));

  // BIA and the final multiplier
  logic         inv_done, inv_busy, mul_done, mul_busy;
  logic [255:0] inv_r, mul_res, mul_a;
  bin_inv #(.MODULUS(SECP_P)) u_bia (.clk, .rst_n, .start(go_q && state_q == S_INV),
                                     .z(r0_q[255:0]), .busy(inv_busy), .done(inv_done), .r(inv_r));
  assign mul_a = (state_q == S_MX) ? r0_q[767:512] : r0_q[511:256];
  malu #(.MODULUS(SECP_P)) u_mul (.clk, .rst_n, .start(go_q && (state_q == S_MX || state_q == S_MY)),
                                  .op(MALU_MUL), .a(mul_a), .b(zinv_q), .busy(mul_busy),
                                  .done(mul_done), .result(mul_res));

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      r0_q     <= '0;
      r1_q     <= '0;
      rt_q     <= '0;
      k_q      <= '0;
      zinv_q   <= '0;
      x_q      <= '0;
      i_q      <= '0;
      go_q     <= 1'b0;
      pa0_ok_q <= 1'b0;
      pa1_ok_q <= 1'b0;
      pub      <= '0;
      inf      <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      go_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          r0_q    <= {256'd0, 256'd1, 256'd0};        // point at infinity
          r1_q    <= {SECP_GX, SECP_GY, 256'd1};      // generator G
          k_q     <= k;
          i_q     <= 8'd255;
          go_q    <= 1'b1;
          state_q <= S_PHA;
        end
        S_PHA: begin
          if (pa0_done) pa0_ok_q <= 1'b1;
          if (pa1_done) pa1_ok_q <= 1'b1;
          if ((pa0_ok_q || pa0_done) && (pa1_ok_q || pa1_done)) begin
            pa0_ok_q <= 1'b0;
            pa1_ok_q <= 1'b0;
            if (kbit) begin r0_q <= pa0_out; r1_q <= pa1_out; end
            else      begin r1_q <= pa0_out; r0_q <= pa1_out; end
            rt_q    <= pa0_out;
            go_q    <= 1'b1;
            state_q <= S_PHB;
          end
        end
        S_PHB: if (pa0_done) begin
          rt_q <= pa0_out;                          // dummy doubling, never read back
          k_q  <= k_q << 1;
          go_q <= 1'b1;
          if (i_q == 8'd0) state_q <= S_INV;
          else begin
            i_q     <= i_q - 8'd1;
            state_q <= S_PHA;
          end
        end
        S_INV: if (inv_done) begin
          zinv_q  <= inv_r;
          go_q    <= 1'b1;
          state_q <= S_MX;
        end
        S_MX: if (mul_done) begin
          x_q     <= mul_res;
          go_q    <= 1'b1;
          state_q <= S_MY;
        end
        S_MY: if (mul_done) begin
          pub     <= {x_q, mul_res};
          inf     <= (r0_q[255:0] == 256'd0);
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
