// MALU: modular arithmetic logic unit for a fixed 256-bit modulus.
//
// Performs (a + b) mod M, (a - b) mod M and (a * b) mod M for operands already reduced
// (a, b < M). Addition and subtraction take one cycle: a 257-bit add or subtract followed by
// one conditional correction. Multiplication uses the shift-and-add (double-and-add)
// method the paper cites, scanning b from its most significant bit: each cycle
// acc <- 2*acc mod M, then acc <- acc + a mod M when the bit is 1. The same two modular
// additions happen every cycle whatever the bit, so the multiply always takes 256 cycles.
//
// Interface: start pulse with op, a, b; done pulses one cycle with result valid until the
// next start. Timing: add/sub done 1 cycle after start, mul 257 cycles after start.
// The operations and the shift-and-add method are the paper's; the one-bit-per-cycle
// schedule is this design's choice. MODULUS defaults to the SECP256K1 field prime p.
module malu
  import ethvault_pkg::*;
#(
  parameter logic [255:0] MODULUS = SECP_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  malu_op_e     op,
  input  logic [255:0] a,
  input  logic [255:0] b,
  output logic         busy,
  output logic         done,
  output logic [255:0] result
);

  logic [255:0] a_q, b_q, acc_q;
  logic [7:0]   bit_q;
  logic         mul_q;

  logic [255:0] dbl, dbl_add;
  always_comb begin
    dbl     = mod_add(acc_q, acc_q, MODULUS);
    dbl_add = b_q[255] ? mod_add(dbl, a_q, MODULUS) : mod_add(dbl, 256'd0, MODULUS);
  end

  assign result = acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      acc_q <= '0;
      bit_q <= '0;
      mul_q <= 1'b0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        unique case (op)
          MALU_ADD: begin acc_q <= mod_add(a, b, MODULUS); done <= 1'b1; end
          MALU_SUB: begin acc_q <= mod_sub(a, b, MODULUS); done <= 1'b1; end
          default: begin
            a_q   <= a;
            b_q   <= b;
            acc_q <= '0;
            bit_q <= '0;
            mul_q <= 1'b1;
            busy  <= 1'b1;
          end
        endcase
      end else if (mul_q) begin
        acc_q <= dbl_add;
        b_q   <= b_q << 1;
        bit_q <= bit_q + 8'd1;
        if (bit_q == 8'd255) begin
          mul_q <= 1'b0;
          busy  <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> a < MODULUS && b < MODULUS)
    else $error("malu operands must be reduced");

endmodule
