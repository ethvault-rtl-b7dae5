// MNG: BIP-39 mnemonic generator.
//
// The 264-bit nc = entropy || checksum is split into 24 indices of 11 bits (MATA,
// nc[263:253] first). Each index selects a word from STORAGE, a 2048-entry table of
// 72-bit entries: the word's ASCII letters left-aligned in bits 71:8 (up to 8 letters)
// and its length in bits in bits 7:0 (1 to 8 letters). The 24 entries are copied to MATB
// through the table's registered read port, two cycles per word.
// VPAD then writes the words, one byte per cycle, into the 2048-bit sentence register
// mcs (first byte in bits 2047:2040) with one space between words, zero-filling the rest.
//
// Interface: wl_we/wl_addr/wl_data load STORAGE (the word list is supplied from outside
// at start-up); start pulse with nc; done pulses one cycle with mcs and mcs_len (bytes)
// valid until the next start. Timing: about 2 + 48 + (number of bytes) cycles, at most
// about 265 cycles for 24 words of 8 letters.
// MATA (24 x 11), STORAGE (2048 x (64 + 8)), MATB (24 x 72), VPAD and the 2048-bit output
// are the paper's; the loadable STORAGE and the byte-serial VPAD are this design's choices.
module mnemonic_gen (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [263:0]  nc,
  input  logic          wl_we,
  input  logic [10:0]   wl_addr,
  input  logic [71:0]   wl_data,
  output logic          busy,
  output logic          done,
  output logic [2047:0] mcs,
  output logic [8:0]    mcs_len
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_PAD} state_e;
  state_e state_q;

  logic [71:0]  storage [2048];
  logic [10:0]  mata_q [24];
  logic [71:0]  matb_q [24];
  logic [71:0]  rd_q;
  logic [4:0]   wi_q;       // word index
  logic [2:0]   ci_q;       // character index within the word
  logic [8:0]   pos_q;      // next byte position in mcs
  logic         rd_v_q;

  // STORAGE: word-list table, one write port and one registered read port
  always_ff @(posedge clk) begin
    if (wl_we) storage[wl_addr] <= wl_data;
    rd_q <= storage[mata_q[wi_q]];
  end

  logic [71:0] cur;
  logic [3:0]  nchar;
  logic [7:0]  ch;
  logic        word_end;
  always_comb begin
    cur      = matb_q[wi_q];
    nchar    = 4'(cur[7:3]);                     // length in bits / 8
    ch       = cur[71 - 8*int'(ci_q) -: 8];
    word_end = (4'(ci_q) + 4'd1 >= nchar);
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      for (int i = 0; i < 24; i++) begin
        mata_q[i] <= '0;
        matb_q[i] <= '0;
      end
      wi_q    <= '0;
      ci_q    <= '0;
      pos_q   <= '0;
      rd_v_q  <= 1'b0;
      mcs     <= '0;
      mcs_len <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          for (int i = 0; i < 24; i++) mata_q[i] <= nc[263 - 11*i -: 11];
          mcs     <= '0;
          wi_q    <= '0;
          rd_v_q  <= 1'b0;
          state_q <= S_FETCH;
        end
        S_FETCH: begin
          // rd_q holds the entry addressed in the previous cycle
          rd_v_q <= 1'b1;
          if (rd_v_q) matb_q[wi_q] <= rd_q;
          if (rd_v_q) begin
            if (wi_q == 5'd23) begin
              wi_q    <= '0;
              ci_q    <= '0;
              pos_q   <= '0;
              state_q <= S_PAD;
            end else begin
              wi_q   <= wi_q + 5'd1;
              rd_v_q <= 1'b0;
            end
          end
        end
        S_PAD: begin
          mcs[2047 - 8*int'(pos_q) -: 8] <= ch;
          if (!word_end) begin
            ci_q  <= ci_q + 3'd1;
            pos_q <= pos_q + 9'd1;
          end else if (wi_q == 5'd23) begin
            mcs_len <= pos_q + 9'd1;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            mcs[2047 - 8*(int'(pos_q) + 1) -: 8] <= 8'h20;   // space between words
            pos_q <= pos_q + 9'd2;
            ci_q  <= '0;
            wi_q  <= wi_q + 5'd1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   wl_we |-> (wl_data[7:0] >= 8'd8 && wl_data[7:0] <= 8'd64 && wl_data[2:0] == 3'd0));

endmodule
