// PA: complete projective point addition on SECP256K1 (a = 0, b3 = 3b = 21).
//
// Executes the 33-step complete addition formula of Renes, Costello and Batina (paper
// Alg. 2) exactly in its published order on one MALU. The formula has no special cases:
// the same sequence computes P + Q, P + P (doubling) and handles the point at infinity
// (0 : 1 : 0), so a point doubling is done by giving the unit the same point twice.
// A small register file holds X1..Z2, t0..t4, X3..Z3 and b3; a 33-entry microprogram names
// the operation and registers of every step.
//
// Interface: start pulse with p1 = {X1, Y1, Z1} and p2 = {X2, Y2, Z2} (768 bits each,
// X in the top bits, coordinates < p); done pulses one cycle with p3 = {X3, Y3, Z3}.
// Timing: fixed, 14 multiplications (257 cycles each) and 19 additions/subtractions plus
// the per-step issue cycles: 3651 cycles from start to done regardless of the operands.
// The formula and the use of one MALU are the paper's; register file and microprogram
// encoding are this design's choices.
module point_add
  import ethvault_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [767:0] p1,
  input  logic [767:0] p2,
  output logic         busy,
  output logic         done,
  output logic [767:0] p3
);

  // register file indices
  localparam int X1 = 0, Y1 = 1, Z1 = 2, X2 = 3, Y2 = 4, Z2 = 5;
  localparam int T0 = 6, T1 = 7, T2 = 8, T3 = 9, T4 = 10, X3 = 11, Y3 = 12, Z3 = 13, B3 = 14;

  typedef struct packed {
    malu_op_e   op;
    logic [3:0] dst;
    logic [3:0] sa;
    logic [3:0] sb;
  } step_t;

  function automatic step_t st(malu_op_e op, int dst, int sa, int sb);
    return '{op: op, dst: 4'(dst), sa: 4'(sa), sb: 4'(sb)};
  endfunction

  // Alg. 2 of the paper, step by step
  localparam int NSTEP = 33;
  step_t prog [NSTEP];
  always_comb begin
    prog[0]  = st(MALU_MUL, T0, X1, X2);
    prog[1]  = st(MALU_MUL, T1, Y1, Y2);
    prog[2]  = st(MALU_MUL, T2, Z1, Z2);
    prog[3]  = st(MALU_ADD, T3, X1, Y1);
    prog[4]  = st(MALU_ADD, T4, X2, Y2);
    prog[5]  = st(MALU_MUL, T3, T3, T4);
    prog[6]  = st(MALU_ADD, T4, T0, T1);
    prog[7]  = st(MALU_SUB, T3, T3, T4);
    prog[8]  = st(MALU_ADD, T4, Y1, Z1);
    prog[9]  = st(MALU_ADD, X3, Y2, Z2);
    prog[10] = st(MALU_MUL, T4, T4, X3);
    prog[11] = st(MALU_ADD, X3, T1, T2);
    prog[12] = st(MALU_SUB, T4, T4, X3);
    prog[13] = st(MALU_ADD, X3, X1, Z1);
    prog[14] = st(MALU_ADD, Y3, X2, Z2);
    prog[15] = st(MALU_MUL, X3, X3, Y3);
    prog[16] = st(MALU_ADD, Y3, T0, T2);
    prog[17] = st(MALU_SUB, Y3, X3, Y3);
    prog[18] = st(MALU_ADD, X3, T0, T0);
    prog[19] = st(MALU_ADD, T0, X3, T0);
    prog[20] = st(MALU_MUL, T2, B3, T2);
    prog[21] = st(MALU_ADD, Z3, T1, T2);
    prog[22] = st(MALU_SUB, T1, T1, T2);
    prog[23] = st(MALU_MUL, Y3, B3, Y3);
    prog[24] = st(MALU_MUL, X3, T4, Y3);
    prog[25] = st(MALU_MUL, T2, T3, T1);
    prog[26] = st(MALU_SUB, X3, T2, X3);
    prog[27] = st(MALU_MUL, Y3, Y3, T0);
    prog[28] = st(MALU_MUL, T1, T1, Z3);
    prog[29] = st(MALU_ADD, Y3, T1, Y3);
    prog[30] = st(MALU_MUL, T0, T0, T3);
    prog[31] = st(MALU_MUL, Z3, Z3, T4);
    prog[32] = st(MALU_ADD, Z3, Z3, T0);
  end

  logic [255:0] rf_q [15];
  logic [5:0]   pc_q;
  logic         issue_q, run_q;
  logic         alu_start, alu_busy, alu_done;
  logic [255:0] alu_res;
  step_t        cur;

  assign cur       = prog[pc_q];
  assign alu_start = issue_q;

  malu #(.MODULUS(SECP_P)) u_malu (
    .clk, .rst_n, .start(alu_start), .op(cur.op), .a(rf_q[cur.sa]), .b(rf_q[cur.sb]),
    .busy(alu_busy), .done(alu_done), .result(alu_res)
  );

  assign busy = run_q;
  assign p3   = {rf_q[X3], rf_q[Y3], rf_q[Z3]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 15; i++) rf_q[i] <= '0;
      pc_q    <= '0;
      issue_q <= 1'b0;
      run_q   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done    <= 1'b0;
      issue_q <= 1'b0;
      if (start && !run_q) begin
        rf_q[X1] <= p1[767:512];
        rf_q[Y1] <= p1[511:256];
        rf_q[Z1] <= p1[255:0];
        rf_q[X2] <= p2[767:512];
        rf_q[Y2] <= p2[511:256];
        rf_q[Z2] <= p2[255:0];
        rf_q[B3] <= SECP_B3;
        pc_q     <= '0;
        run_q    <= 1'b1;
        issue_q  <= 1'b1;
      end else if (run_q && alu_done) begin
        rf_q[cur.dst] <= alu_res;
        if (pc_q == 6'(NSTEP - 1)) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else begin
          pc_q    <= pc_q + 6'd1;
          issue_q <= 1'b1;
        end
      end
    end
  end

endmodule
