// polar_decoder_chip: the decoder chip's core-clock domain.
// Frames arrive on a 32-bit valid/ready input (format in in_scheduler): the input
// scheduler picks a decoder, the code construction unit writes that decoder's frozen and
// good bits, and the channel LLRs are loaded into it.  Five flexible decoders (list size up
// to 8, N up to 2^14), one ultra-reliable decoder (list 32, N up to 2^11) and one SC decoder
// (N up to 2^15) then decode independently, so up to seven frames are in flight.  The
// output scheduler takes finished frames in round-robin order: a header word (out_hdr) and
// then the information bits packed 32 per word by the de-frozen unit (out_last on the last
// word of a frame).  Decoder indices: 0..4 flexible, 5 ultra-reliable, 6 SC.
// One clock: the clock management unit, the LVDS receiver and sender and the SPI bus are
// outside this RTL; in_* and out_* are where the LVDS receiver and sender attach.
module polar_decoder_chip #(
  parameter int unsigned FLEX_NLOG = 14,
  parameter int unsigned FLEX_L    = 8,
  parameter int unsigned UR_NLOG   = 11,
  parameter int unsigned UR_L      = 32,
  parameter int unsigned SC_NLOG   = 15,
  localparam int unsigned N_FLEX = 5,
  localparam int unsigned ND     = N_FLEX + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [31:0]   in_data,
  output logic          out_valid,
  output logic [31:0]   out_data,
  output logic          out_hdr,
  output logic          out_last,
  output logic [ND-1:0] dec_busy
);
  localparam int unsigned NLOG_MAX = (SC_NLOG > FLEX_NLOG) ?
      ((SC_NLOG > UR_NLOG) ? SC_NLOG : UR_NLOG) : ((FLEX_NLOG > UR_NLOG) ? FLEX_NLOG : UR_NLOG);
  localparam int unsigned NW_MAX = NLOG_MAX - 5;

  logic               cons_start, cons_done, cons_busy, fz_we;
  logic [3:0]         cons_nlog, cfg_nlog;
  logic [15:0]        cons_k, cons_g;
  logic [NW_MAX-1:0]  fz_waddr, ch_waddr, rd_addr;
  logic [31:0]        fz_frozen, fz_good;
  logic [ND-1:0]      fz_target, ch_we, dec_start, dec_done, dec_crc_ok, dec_release;
  logic [31:0][5:0]   ch_wdata;
  logic [2:0]         cfg_llog;
  logic               cfg_crc_en;
  logic [ND-1:0][5:0] dec_tag;
  logic [ND-1:0][3:0] dec_nlog;
  logic [ND-1:0][31:0] dec_rd_u, dec_rd_frozen;
  logic               df_valid, df_last, hdr_valid, dfo_valid, dfo_last;
  logic [31:0]        df_u, df_frozen, hdr_data, dfo_data;

  in_scheduler #(.N_FLEX(N_FLEX), .NW_MAX(NW_MAX), .FLEX_MAX(FLEX_NLOG), .UR_MAX(UR_NLOG),
                 .SC_MAX(SC_NLOG)) u_in (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .dec_busy(dec_busy), .cons_start(cons_start), .cons_nlog(cons_nlog), .cons_k(cons_k),
    .cons_g(cons_g), .cons_done(cons_done), .fz_target(fz_target), .ch_we(ch_we),
    .ch_waddr(ch_waddr), .ch_wdata(ch_wdata), .dec_start(dec_start), .cfg_nlog(cfg_nlog),
    .cfg_llog(cfg_llog), .cfg_crc_en(cfg_crc_en), .dec_tag(dec_tag));

  code_construction #(.N_MAX_LOG(NLOG_MAX)) u_cons (
    .clk(clk), .rst_n(rst_n), .start(cons_start), .nlog(cons_nlog), .k(cons_k),
    .gcount(cons_g), .busy(cons_busy), .done(cons_done), .fz_we(fz_we), .fz_waddr(fz_waddr),
    .fz_frozen(fz_frozen), .fz_good(fz_good));

  for (genvar d = 0; d < int'(ND); d++) begin : g_dec
    localparam int unsigned NL = (d < int'(N_FLEX)) ? FLEX_NLOG : (d == int'(N_FLEX)) ? UR_NLOG : SC_NLOG;
    localparam int unsigned LL = (d < int'(N_FLEX)) ? FLEX_L : (d == int'(N_FLEX)) ? UR_L : 1;
    localparam int unsigned QI = (d == int'(N_FLEX) + 1) ? 7 : 6;
    localparam int unsigned Q0 = (d < int'(N_FLEX)) ? 6 : 7;
    scl_decoder #(.N_MAX_LOG(NL), .L_MAX(LL), .QI(QI), .QI0(Q0)) u_dec (
      .clk(clk), .rst_n(rst_n),
      .ch_we(ch_we[d]), .ch_waddr((NL-5)'(ch_waddr)), .ch_wdata(ch_wdata),
      .fz_we(fz_we && fz_target[d]), .fz_waddr((NL-5)'(fz_waddr)), .fz_frozen(fz_frozen),
      .fz_good(fz_good),
      .start(dec_start[d]), .cfg_nlog(cfg_nlog), .cfg_llog(cfg_llog), .cfg_crc_en(cfg_crc_en),
      .busy(dec_busy[d]), .done(dec_done[d]), .crc_ok(dec_crc_ok[d]), .res_nlog(dec_nlog[d]),
      .rd_addr((NL-5)'(rd_addr)), .rd_u(dec_rd_u[d]), .rd_frozen(dec_rd_frozen[d]),
      .release_i(dec_release[d]));
  end

  out_scheduler #(.N_DEC(ND), .NW_MAX(NW_MAX)) u_out (
    .clk(clk), .rst_n(rst_n), .dec_done(dec_done), .dec_crc_ok(dec_crc_ok),
    .dec_nlog(dec_nlog), .dec_tag(dec_tag), .rd_addr(rd_addr), .dec_rd_u(dec_rd_u),
    .dec_rd_frozen(dec_rd_frozen), .dec_release(dec_release), .df_valid(df_valid),
    .df_u(df_u), .df_frozen(df_frozen), .df_last(df_last), .hdr_valid(hdr_valid),
    .hdr_data(hdr_data));

  defrozen_unit u_df (
    .clk(clk), .rst_n(rst_n), .in_valid(df_valid), .in_u(df_u), .in_frozen(df_frozen),
    .in_last(df_last), .out_valid(dfo_valid), .out_data(dfo_data), .out_last(dfo_last));

  assign out_valid = hdr_valid || dfo_valid;
  assign out_data  = hdr_valid ? hdr_data : dfo_data;
  assign out_hdr   = hdr_valid;
  assign out_last  = dfo_last && !hdr_valid;
endmodule
