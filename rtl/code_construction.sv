// code_construction: builds the frozen-bit set and the good-bit set of a frame on chip, so
// that only (N, k) has to be sent with the data and any code rate can be used.
// Reliability of sub-channel i is its polarization weight W(i) = sum over set bits j of i of
// 2^(j/4), here in fixed point round(256 * 2^(j/4)).  The k most reliable positions are
// information bits, the gcount most reliable are good bits; equal weights are ranked by the
// higher index first.  The selection needs no sort: 16 counting passes over the N indices
// find, bit by bit, the largest threshold T with count(W >= T) >= k (both sets searched in
// the same passes), one pass counts W > T, and a last pass from index N-1 down to 0 marks
// W > T and the first (k - count(W > T)) indices with W == T.  Flags are written 32 per word
// to the target decoder's frozen/good memory (fz_*).  Timing: 18 * N cycles.
// The paper gives only the function of this unit; the weight metric and the threshold search
// are this design's choices.
module code_construction #(
  parameter int unsigned N_MAX_LOG = 15,
  localparam int unsigned NW = N_MAX_LOG - 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [3:0]    nlog,
  input  logic [15:0]   k,
  input  logic [15:0]   gcount,
  output logic          busy,
  output logic          done,
  output logic          fz_we,
  output logic [NW-1:0] fz_waddr,
  output logic [31:0]   fz_frozen,
  output logic [31:0]   fz_good
);
  localparam int WB = 16;
  localparam logic [WB-1:0] PW_TAB [16] = '{16'd256, 16'd304, 16'd362, 16'd431, 16'd512,
    16'd609, 16'd724, 16'd861, 16'd1024, 16'd1218, 16'd1448, 16'd1722, 16'd2048, 16'd2435,
    16'd2896, 16'd3444};

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_GT, S_OUT} state_e;
  state_e state;

  logic [3:0]           nl;
  logic [15:0]          kk, gg;
  logic [NW-1:0]        wi, last_wi;       // word index (32 sub-channels per word)
  logic [4:0]           b;
  logic [WB-1:0]        thr_i, thr_g;
  logic [N_MAX_LOG:0]   cnt_i, cnt_g, rem_i, rem_g;
  logic [WB-1:0]        wbase, cand_i, cand_g;
  logic [31:0][WB-1:0]  wt;
  logic [N_MAX_LOG:0]   cnt_i_nx, cnt_g_nx, rem_i_nx, rem_g_nx;
  logic [31:0]          info_w, good_w;

  always_comb begin
    wbase = '0;
    for (int j = 5; j < int'(N_MAX_LOG); j++)
      if (wi[j-5]) wbase = wbase + PW_TAB[j];
    for (int l = 0; l < 32; l++) begin
      wt[l] = wbase;
      for (int j = 0; j < 5; j++)
        if (((l >> j) & 1) != 0) wt[l] = wt[l] + PW_TAB[j];
    end
    cand_i = thr_i | (WB'(1) << b);
    cand_g = thr_g | (WB'(1) << b);
    cnt_i_nx = cnt_i;
    cnt_g_nx = cnt_g;
    for (int l = 0; l < 32; l++) begin
      if ((state == S_SEARCH) ? (wt[l] >= cand_i) : (wt[l] > thr_i)) cnt_i_nx = cnt_i_nx + 1'b1;
      if ((state == S_SEARCH) ? (wt[l] >= cand_g) : (wt[l] > thr_g)) cnt_g_nx = cnt_g_nx + 1'b1;
    end
    // output pass: highest index first, ties take the remaining count
    rem_i_nx = rem_i;
    rem_g_nx = rem_g;
    info_w = '0;
    good_w = '0;
    for (int l = 31; l >= 0; l--) begin
      if (wt[l] > thr_i) info_w[l] = 1'b1;
      else if (wt[l] == thr_i && rem_i_nx != 0) begin
        info_w[l] = 1'b1;
        rem_i_nx = rem_i_nx - 1'b1;
      end
      if (wt[l] > thr_g) good_w[l] = 1'b1;
      else if (wt[l] == thr_g && rem_g_nx != 0) begin
        good_w[l] = 1'b1;
        rem_g_nx = rem_g_nx - 1'b1;
      end
    end
  end

  assign last_wi = NW'((1 << (nl - 4'd5)) - 1);
  assign busy = state != S_IDLE;
  assign fz_we = state == S_OUT;
  assign fz_waddr = wi;
  assign fz_frozen = ~info_w;
  assign fz_good = good_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      nl <= 4'd6;
      kk <= '0;
      gg <= '0;
      wi <= '0;
      b <= '0;
      thr_i <= '0;
      thr_g <= '0;
      cnt_i <= '0;
      cnt_g <= '0;
      rem_i <= '0;
      rem_g <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          nl <= nlog;
          kk <= k;
          gg <= gcount;
          thr_i <= '0;
          thr_g <= '0;
          b <= 5'(WB - 1);
          wi <= '0;
          cnt_i <= '0;
          cnt_g <= '0;
          state <= S_SEARCH;
        end
        S_SEARCH: begin
          if (wi == last_wi) begin
            if (cnt_i_nx >= (N_MAX_LOG+1)'(kk)) thr_i <= cand_i;
            if (cnt_g_nx >= (N_MAX_LOG+1)'(gg)) thr_g <= cand_g;
            cnt_i <= '0;
            cnt_g <= '0;
            wi <= '0;
            if (b == 5'd0) state <= S_GT;
            else b <= b - 5'd1;
          end else begin
            cnt_i <= cnt_i_nx;
            cnt_g <= cnt_g_nx;
            wi <= wi + 1'b1;
          end
        end
        S_GT: begin
          if (wi == last_wi) begin
            rem_i <= (N_MAX_LOG+1)'(kk) - cnt_i_nx;
            rem_g <= (N_MAX_LOG+1)'(gg) - cnt_g_nx;
            state <= S_OUT;
          end else begin
            cnt_i <= cnt_i_nx;
            cnt_g <= cnt_g_nx;
            wi <= wi + 1'b1;
          end
        end
        S_OUT: begin
          rem_i <= rem_i_nx;
          rem_g <= rem_g_nx;
          if (wi == '0) begin
            state <= S_IDLE;
            done <= 1'b1;
          end else wi <= wi - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
