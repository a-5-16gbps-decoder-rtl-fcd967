// bit_recovery: rebuilds the decoded source vector u of the chosen list path from its stored
// partial sums, so no separate u memory per path is needed (the paper's Proposition 1).
// After the last bit, the partial-sum row of stage t (2^t bits) holds
// u[N-2^(t+1) .. N-2^t-1] * G_t, and since G_t is its own inverse, encoding the row again
// gives those bits of u back.  Rows of stages 5..n-1 are read word by word (32 bits) through
// the ps_* port, each word is transformed with the 32-bit polar encoder and written into the
// N-bit u memory; then, for every row longer than one word, butterflies across words
// (u[w] ^= u[w | 2^s], one pair per cycle) finish the transform in place.  The last 32 bits
// of u are taken directly from the parallel unit's decided-bit register (last_bits).
// Timing: about 2^(n-5) + sum_t (t-5) * 2^(t-5) cycles from start to done.  The u memory is
// then read through rd_addr/rd_data (asynchronous).  In the paper this runs in parallel with
// the next package; here the decoder waits for it.
module bit_recovery #(
  parameter int unsigned N_MAX_LOG = 14,
  localparam int unsigned NW = N_MAX_LOG - 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [3:0]    nlog,        // 6 .. N_MAX_LOG
  input  logic [31:0]   last_bits,
  output logic [3:0]    ps_stage,
  output logic [NW-1:0] ps_word,
  input  logic [31:0]   ps_rdata,
  output logic          busy,
  output logic          done,
  input  logic [NW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_LAST, S_BFLY} state_e;
  state_e state;
  logic [3:0]    t, s;
  logic [NW:0]   w;
  logic          we;
  logic [NW-1:0] waddr, ra0, ra1;
  logic [31:0]   wdata, rd0, rd1;
  logic [NW:0]   nwords, seg_len, seg_base;

  always_comb begin
    nwords   = (NW+1)'(1) << (nlog - 4'd5);
    seg_len  = (NW+1)'(1) << (t - 4'd5);
    seg_base = nwords - ((NW+1)'(1) << (t - 4'd4));
  end

  assign ps_stage = t;
  assign ps_word  = w[NW-1:0];
  assign busy     = state != S_IDLE;

  always_comb begin
    we = 1'b0;
    waddr = '0;
    wdata = '0;
    ra0 = rd_addr;
    ra1 = '0;
    case (state)
      S_COPY: begin
        we = 1'b1;
        waddr = NW'(seg_base + w);
        wdata = polar_pkg::polar_enc32(ps_rdata);
      end
      S_LAST: begin
        we = 1'b1;
        waddr = NW'(nwords - 1'b1);
        wdata = last_bits;
      end
      S_BFLY: begin
        ra0 = NW'(seg_base + w);
        ra1 = NW'(seg_base + (w | ((NW+1)'(1) << s)));
        we = w[s] == 1'b0;
        waddr = ra0;
        wdata = rd0 ^ rd1;
      end
      default: ;
    endcase
  end
  assign rd_data = rd0;

  word_ram #(.WIDTH(32), .DEPTH(1 << NW)) u_umem (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
    .raddr0(ra0), .rdata0(rd0), .raddr1(ra1), .rdata1(rd1)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t <= 4'd5;
      s <= '0;
      w <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_COPY;
          t <= 4'd5;
          w <= '0;
        end
        S_COPY: begin
          if (w == seg_len - 1'b1) begin
            w <= '0;
            if (t == nlog - 4'd1) state <= S_LAST;
            else t <= t + 4'd1;
          end else w <= w + 1'b1;
        end
        S_LAST: begin
          if (nlog > 4'd6) begin
            state <= S_BFLY;
            t <= 4'd6;
            s <= '0;
            w <= '0;
          end else begin
            state <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_BFLY: begin
          if (w == seg_len - 1'b1) begin
            w <= '0;
            if (s == t - 4'd6) begin
              s <= '0;
              if (t == nlog - 4'd1) begin
                state <= S_IDLE;
                done <= 1'b1;
              end else t <= t + 4'd1;
            end else s <= s + 4'd1;
          end else w <= w + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
