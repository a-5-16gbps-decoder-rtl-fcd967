// out_scheduler: collects finished frames from the decoders in round-robin order.
// For the chosen decoder it first emits one header word on hdr_* (bits [5:0] tag,
// [9:6] log2 N, [12:10] decoder index, [13] CRC passed, [31:14] zero), then reads the decoder's
// recovered u and frozen mask word by word (one per cycle, asynchronous read through
// rd_addr) and streams them to the de-frozen unit, releases the decoder and waits two
// cycles (then one cycle to pick) so the de-frozen unit can flush before the next header.  The header layout and
// the round-robin rule are this design's choices; the paper only names the unit.
module out_scheduler #(
  parameter int unsigned N_DEC  = 7,
  parameter int unsigned NW_MAX = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_DEC-1:0]        dec_done,
  input  logic [N_DEC-1:0]        dec_crc_ok,
  input  logic [N_DEC-1:0][3:0]   dec_nlog,
  input  logic [N_DEC-1:0][5:0]   dec_tag,
  output logic [NW_MAX-1:0]       rd_addr,
  input  logic [N_DEC-1:0][31:0]  dec_rd_u,
  input  logic [N_DEC-1:0][31:0]  dec_rd_frozen,
  output logic [N_DEC-1:0]        dec_release,
  output logic                    df_valid,
  output logic [31:0]             df_u,
  output logic [31:0]             df_frozen,
  output logic                    df_last,
  output logic                    hdr_valid,
  output logic [31:0]             hdr_data
);
  localparam int unsigned DW = $clog2(N_DEC);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_SEND, S_REL, S_GAP} state_e;
  state_e state;
  logic [DW-1:0] sel, rr, pick;
  logic          found;
  logic [NW_MAX:0] w;
  logic [1:0]    gap;
  logic [NW_MAX:0] nwords;

  always_comb begin
    int d;
    found = 1'b0;
    pick = '0;
    for (int o = int'(N_DEC); o >= 1; o--) begin
      d = (int'(rr) + o) % int'(N_DEC);
      if (dec_done[d]) begin
        found = 1'b1;
        pick = DW'(d);
      end
    end
  end

  assign nwords    = (NW_MAX+1)'(1) << (dec_nlog[sel] - 4'd5);
  assign rd_addr   = NW_MAX'(w);
  assign df_valid  = state == S_SEND;
  assign df_u      = dec_rd_u[sel];
  assign df_frozen = dec_rd_frozen[sel];
  assign df_last   = w == nwords - 1'b1;
  assign hdr_valid = state == S_HDR;
  assign hdr_data  = {18'h0, dec_crc_ok[sel], 3'(sel), dec_nlog[sel], dec_tag[sel]};
  assign dec_release = (state == S_REL) ? (N_DEC'(1) << sel) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      sel <= '0;
      rr <= DW'(N_DEC - 1);
      w <= '0;
      gap <= '0;
    end else begin
      case (state)
        S_IDLE: if (found) begin
          sel <= pick;
          rr <= pick;
          state <= S_HDR;
        end
        S_HDR: begin
          w <= '0;
          state <= S_SEND;
        end
        S_SEND: begin
          if (w == nwords - 1'b1) state <= S_REL;
          else w <= w + 1'b1;
        end
        S_REL: begin
          gap <= 2'd1;
          state <= S_GAP;
        end
        S_GAP: begin
          if (gap == 2'd0) state <= S_IDLE;
          else gap <= gap - 2'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
