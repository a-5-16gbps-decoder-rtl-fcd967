// in_scheduler: accepts frames from the input link and hands each to a free decoder.
// Frame format on in_data (valid/ready handshake, one word per beat):
//   word 0: frame_hdr_t  (decoder kind, log2 N, log2 L, CRC enable, 6-bit tag)
//   word 1: frame_len_t  (k information bits incl. CRC, number of good bits)
//   then N beats, each one 6-bit sign-magnitude channel LLR in bits [5:0], in codeword order.
// For a flexible-decoder frame the lowest-numbered idle flexible decoder is taken (index
// 0..N_FLEX-1), the ultra-reliable decoder is index N_FLEX, the SC decoder N_FLEX+1.  The
// scheduler waits until that decoder is idle, runs the code construction unit for it (its
// frozen/good flags go straight to the target, fz_target), then packs the LLRs 32 per word
// into the target's channel memory and pulses its start.  ready is low while waiting and
// during construction.  The frame format and the selection rule are this design's choices;
// the paper only names the unit.
module in_scheduler #(
  parameter int unsigned N_FLEX   = 5,
  parameter int unsigned NW_MAX   = 10,
  parameter int unsigned FLEX_MAX = 14,
  parameter int unsigned UR_MAX   = 11,
  parameter int unsigned SC_MAX   = 15,
  localparam int unsigned ND = N_FLEX + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [31:0]          in_data,
  input  logic [ND-1:0]        dec_busy,
  output logic                 cons_start,
  output logic [3:0]           cons_nlog,
  output logic [15:0]          cons_k,
  output logic [15:0]          cons_g,
  input  logic                 cons_done,
  output logic [ND-1:0]        fz_target,
  output logic [ND-1:0]        ch_we,
  output logic [NW_MAX-1:0]    ch_waddr,
  output logic [31:0][5:0]     ch_wdata,
  output logic [ND-1:0]        dec_start,
  output logic [3:0]           cfg_nlog,
  output logic [2:0]           cfg_llog,
  output logic                 cfg_crc_en,
  output logic [ND-1:0][5:0]   dec_tag
);
  import polar_pkg::*;
  typedef enum logic [2:0] {S_H0, S_H1, S_PICK, S_CONS, S_WAIT, S_LOAD, S_START} state_e;
  state_e state;

  frame_hdr_t hdr;
  frame_len_t len;
  logic [$clog2(ND)-1:0] tgt;
  logic [15:0] beat;
  logic [4:0]  lane;
  logic [31:0][5:0] pack;
  logic [3:0] nl_clamped, nl_max;
  logic       found;
  logic [$clog2(ND)-1:0] pick;

  always_comb begin
    case (hdr.sel)
      DEC_UR:  nl_max = 4'(UR_MAX);
      DEC_SC:  nl_max = 4'(SC_MAX);
      default: nl_max = 4'(FLEX_MAX);
    endcase
    nl_clamped = (hdr.nlog < 4'd6) ? 4'd6 : (hdr.nlog > nl_max) ? nl_max : hdr.nlog;
    found = 1'b0;
    pick = '0;
    case (hdr.sel)
      DEC_UR: begin
        found = !dec_busy[N_FLEX];
        pick = $clog2(ND)'(N_FLEX);
      end
      DEC_SC: begin
        found = !dec_busy[N_FLEX+1];
        pick = $clog2(ND)'(N_FLEX + 1);
      end
      default:
        for (int d = int'(N_FLEX) - 1; d >= 0; d--)
          if (!dec_busy[d]) begin
            found = 1'b1;
            pick = $clog2(ND)'(d);
          end
    endcase
  end

  assign in_ready   = (state == S_H0) || (state == S_H1) || (state == S_LOAD);
  assign cons_start = state == S_CONS;
  assign cons_nlog  = cfg_nlog;
  assign cons_k     = len.k;
  assign cons_g     = len.gcount;
  assign fz_target  = ND'(1) << tgt;
  assign cfg_llog   = (hdr.sel == DEC_SC) ? 3'd0 : hdr.llog;
  assign cfg_crc_en = hdr.crc_en;
  assign dec_start  = (state == S_START) ? (ND'(1) << tgt) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_H0;
      hdr <= '0;
      len <= '0;
      tgt <= '0;
      beat <= '0;
      lane <= '0;
      pack <= '0;
      cfg_nlog <= 4'd6;
      ch_we <= '0;
      ch_waddr <= '0;
      ch_wdata <= '0;
      dec_tag <= '0;
    end else begin
      ch_we <= '0;
      case (state)
        S_H0: if (in_valid) begin
          hdr <= frame_hdr_t'(in_data);
          state <= S_H1;
        end
        S_H1: if (in_valid) begin
          len <= frame_len_t'(in_data);
          state <= S_PICK;
        end
        S_PICK: if (found) begin
          tgt <= pick;
          cfg_nlog <= nl_clamped;
          dec_tag[pick] <= hdr.tag;
          state <= S_CONS;
        end
        S_CONS: state <= S_WAIT;
        S_WAIT: if (cons_done) begin
          beat <= '0;
          lane <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          pack[lane] <= in_data[5:0];
          lane <= lane + 5'd1;
          beat <= beat + 16'd1;
          if (lane == 5'd31) begin
            ch_we <= ND'(1) << tgt;
            ch_waddr <= NW_MAX'(beat >> 5);
            for (int j = 0; j < 31; j++) ch_wdata[j] <= pack[j];
            ch_wdata[31] <= in_data[5:0];
          end
          if (beat == 16'((1 << cfg_nlog) - 1)) state <= S_START;
        end
        S_START: state <= S_H0;
        default: state <= S_H0;
      endcase
    end
  end
endmodule
