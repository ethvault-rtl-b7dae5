// ECDSA: signature generation over SECP256K1, r = (k * G).x mod n,
// s = k^-1 (z + d r) mod n (paper Alg. 7 and Fig. 11).
//
// Datapath (register names as in the paper's figure):
//   k * G comes from the SECP256K1 unit inside CKDF, through the p_* request port;
//   BINV (binary inversion modulo n) computes k^-1 in parallel and stores it in R1;
//   R0 takes x and runs the "-n" loop (subtract n while R0 >= n), giving r;
//   R3 takes the private key d and runs its own "-n" loop; R2 takes r from R0;
//   MM (a MALU modulo n) multiplies R2 * R3; "+z" adds the message hash z and R4 runs the
//   "-n" loop on the sum; then R3 <- R4, R2 <- R1 and MM forms s = k^-1 (z + d r).
// Every "-n" step is one clock cycle, so inputs above n (k, d or z >= n) are reduced as the
// paper's edge-case tests require. k = 0 or d r + z = 0 gives r = 0 or s = 0 and valid = 0.
//
// Interface: start pulse with k, d and z held until done; done pulses one cycle with r, s
// and valid held until the next start; nred counts the "-n" steps of the last signature.
// Timing: the point multiplication (about 1,870,900 cycles) plus 2 x 257 for MM and a few
// cycles per reduction step: about 1,871,450 cycles
// (paper: 1,888,550).
// The register/mux structure is the paper's. This design's choices: R4 is 257 bits wide,
// since z + d r can exceed 2^256 before its reduction; the nonce k is an input (the paper
// leaves its generation to an RNG or RFC 6979).
module ecdsa
  import ethvault_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] k,
  input  logic [255:0] d,
  input  logic [255:0] z,
  output logic         busy,
  output logic         done,
  output logic [255:0] r,
  output logic [255:0] s,
  output logic         valid,
  output logic [7:0]   nred,
  // request port to SECP256K1 (inside CKDF)
  output logic         p_start,
  output logic [255:0] p_k,
  input  logic         p_done,
  input  logic [255:0] p_x,
  input  logic         p_inf
);

  typedef enum logic [2:0] {S_IDLE, S_KG, S_RED0, S_RED3, S_MM1, S_RED4, S_MM2} state_e;
  state_e state_q;

  logic [255:0] r0_q, r1_q, r2_q, r3_q;
  logic [256:0] r4_q;
  logic         kg_done_q, inv_done_q, go_q, inf_q;
  logic [7:0]   nred_q;       // number of "-n" steps taken in this signature

  // BINV modulo n
  logic         inv_done, inv_busy;
  logic [255:0] inv_r;
  bin_inv #(.MODULUS(SECP_N)) u_binv (.clk, .rst_n, .start(go_q && state_q == S_KG), .z(k),
                                      .busy(inv_busy), .done(inv_done), .r(inv_r));

  // MM: modular multiplier modulo n
  logic         mm_done, mm_busy;
  logic [255:0] mm_res;
  malu #(.MODULUS(SECP_N)) u_mm (.clk, .rst_n,
                                 .start(go_q && (state_q == S_MM1 || state_q == S_MM2)),
                                 .op(MALU_MUL), .a(r2_q), .b(r3_q), .busy(mm_busy),
                                 .done(mm_done), .result(mm_res));

  assign p_start = go_q && state_q == S_KG;
  assign p_k     = k;
  assign busy    = (state_q != S_IDLE);
  assign nred    = nred_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      r0_q       <= '0;
      r1_q       <= '0;
      r2_q       <= '0;
      r3_q       <= '0;
      r4_q       <= '0;
      kg_done_q  <= 1'b0;
      inv_done_q <= 1'b0;
      inf_q      <= 1'b0;
      go_q       <= 1'b0;
      nred_q     <= '0;
      r          <= '0;
      s          <= '0;
      valid      <= 1'b0;
      done       <= 1'b0;
    end else begin
      go_q <= 1'b0;
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          kg_done_q  <= 1'b0;
          inv_done_q <= 1'b0;
          nred_q     <= '0;
          r3_q       <= d;
          go_q       <= 1'b1;
          state_q    <= S_KG;
        end
        // k * G and k^-1 in parallel
        S_KG: begin
          if (p_done)   begin r0_q <= p_x;   inf_q <= p_inf; kg_done_q <= 1'b1; end
          if (inv_done) begin r1_q <= inv_r; inv_done_q <= 1'b1; end
          if ((kg_done_q || p_done) && (inv_done_q || inv_done)) state_q <= S_RED0;
        end
        // R0 "-n" loop, then R2 <- R0 (= r)
        S_RED0: begin
          if (r0_q >= SECP_N) begin
            r0_q   <= r0_q - SECP_N;
            nred_q <= nred_q + 8'd1;
          end else begin
            r2_q    <= r0_q;
            state_q <= S_RED3;
          end
        end
        // R3 "-n" loop on d
        S_RED3: begin
          if (r3_q >= SECP_N) begin
            r3_q   <= r3_q - SECP_N;
            nred_q <= nred_q + 8'd1;
          end else begin
            go_q    <= 1'b1;
            state_q <= S_MM1;
          end
        end
        // MM = r * d, R4 <- MM + z
        S_MM1: if (mm_done) begin
          r4_q    <= {1'b0, mm_res} + {1'b0, z};
          state_q <= S_RED4;
        end
        // R4 "-n" loop, then R3 <- R4, R2 <- R1
        S_RED4: begin
          if (r4_q >= {1'b0, SECP_N}) begin
            r4_q   <= r4_q - {1'b0, SECP_N};
            nred_q <= nred_q + 8'd1;
          end else begin
            r3_q    <= r4_q[255:0];
            r2_q    <= r1_q;
            go_q    <= 1'b1;
            state_q <= S_MM2;
          end
        end
        S_MM2: if (mm_done) begin
          r       <= r0_q;
          s       <= mm_res;
          valid   <= !inf_q && (r0_q != '0) && (mm_res != '0);
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
