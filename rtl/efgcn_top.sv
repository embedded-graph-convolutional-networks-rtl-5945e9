// efgcn_top -- programmable-logic part of the EFGCN event-graph classifier
// (Base model: conv dims 16-32-32-64-64, graph size BETA = 128, time window
// 100 ms, one vector multiplier per synchronous layer).
//
// Data path (all stages run concurrently):
//   raw events -> generate_graph (normalise, FIFO, edges_gen + NM)
//     -> async_conv   conv1, 4 -> DIM1, event by event, 15 clocks/event
//     -> maxpool_async 4x4x4 into feature memory 1        (graph BETA/4)
//     -> sync_conv    conv2 -> feature memory 2 (direct write)
//     -> sync_conv    conv3 -> maxpool_sync 2x2x2 -> feature memory 3 (BETA/8)
//     -> sync_conv    conv4 -> feature memory 4 (direct write)
//     -> sync_conv    conv5 -> maxpool_sync to 4x4 over a quarter window
//     -> feature memory 5 -> out_serialise -> m_* stream to the processor.
// From the first pooling on, data move as temporal channels: 2-D maps of
// everything that happened in one time slice (TW/(BETA/4) after pooling 1,
// TW/(BETA/8) after pooling 2, TW/4 at the output). Each convolution of the
// synchronous part needs the current and the previous channel, which the
// three-bank feature memories provide; a channel is handed on with a bank
// swap and a finished reader frees the oldest bank.
//
// Time base: a microsecond counter derived from the clock (CLK_PER_US clocks
// per microsecond). Incoming events carry timestamps on the same base. The
// normalised current time is passed to the first pooling layer, but only
// while the asynchronous part holds no event, so that a channel is never
// closed before its last event has arrived.
//
// Parameters are loaded through the wl_* bus: wl_layer selects conv1..conv5,
// the address layout is in efgcn_pkg. The linear classifier that turns the
// 4x4xDIM5 map into classes runs in software and is not part of this block.
//
// The structure, sizes and rates follow the paper. The time base, the
// back-pressure between stages and the load bus are this design's choices.
module efgcn_top
  import efgcn_pkg::*;
#(
  parameter int BETA           = 128,
  parameter int SENSOR_X       = 120,
  parameter int SENSOR_Y       = 100,
  parameter int TIME_WINDOW_US = 100000,
  parameter int CLK_PER_US     = 200,
  parameter int FIFO_DEPTH     = 1024,
  parameter int DIM1           = 16,
  parameter int DIM2           = 32,
  parameter int DIM3           = 32,
  parameter int DIM4           = 64,
  parameter int DIM5           = 64,
  parameter int M2             = 1,
  parameter int M3             = 1,
  parameter int M4             = 1,
  parameter int M5             = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // events
  input  logic            ev_valid,
  input  logic [8:0]      ev_x,
  input  logic [8:0]      ev_y,
  input  logic [TS_W-1:0] ev_t,
  input  logic            ev_p,
  // parameter load
  input  logic            wl_en,
  input  logic [2:0]      wl_layer,
  input  logic [15:0]     wl_addr,
  input  logic [31:0]     wl_data,
  // output feature maps
  output logic            m_valid,
  input  logic            m_ready,
  output logic [31:0]     m_data,
  output logic            m_last,
  output logic            m_cell_valid,
  // status
  output logic [TS_W-1:0] now_us,
  output logic [31:0]     stat_fifo_drops,
  output logic [31:0]     stat_late_drops,
  output logic [31:0]     stat_maps
);
  localparam int S1  = BETA / 4;
  localparam int S2  = BETA / 8;
  localparam int S3  = 4;
  localparam int K3  = S2 / S3;
  localparam int W1  = DIM1 * 8 + PNEIGH + 1;
  localparam int W2  = DIM2 * 8 + PNEIGH + 1;
  localparam int W3  = DIM3 * 8 + PNEIGH + 1;
  localparam int W4  = DIM4 * 8 + PNEIGH + 1;
  localparam int W5  = DIM5 * 8 + PNEIGH + 1;
  localparam int A1  = $clog2(S1 * S1);
  localparam int A2  = $clog2(S2 * S2);
  localparam int A3  = $clog2(S3 * S3);

  wl_t wl;
  assign wl = '{en: wl_en, layer: wl_layer, addr: wl_addr, data: wl_data};

  // ------------------------------------------------------------- time base
  logic [$clog2(CLK_PER_US)-1:0] presc;
  logic [TS_W-1:0] time_done;
  logic            async_idle;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      presc <= '0; now_us <= '0; time_done <= '0;
    end else begin
      if (presc == ($clog2(CLK_PER_US))'(CLK_PER_US - 1)) begin
        presc  <= '0;
        now_us <= now_us + 1'b1;
      end else presc <= presc + 1'b1;
      if (async_idle) time_done <= norm_time(now_us, BETA, TIME_WINDOW_US);
    end
  end

  // ------------------------------------------------------------- graph generation
  logic g_valid, g_ready, g_idle;
  nev_t g_ev;
  eg_t  g_eg;
  generate_graph #(.BETA(BETA), .SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y),
                   .TIME_WINDOW_US(TIME_WINDOW_US), .FIFO_DEPTH(FIFO_DEPTH)) u_generate_graph (
    .clk, .rst_n, .ev_valid, .ev_x, .ev_y, .ev_t, .ev_p,
    .out_valid(g_valid), .out_ready(g_ready), .out_ev(g_ev), .out_edges(g_eg),
    .idle(g_idle), .fifo_drops(stat_fifo_drops), .fifo_level());

  // ------------------------------------------------------------- conv1
  logic c1_valid, c1_ready, c1_idle;
  nev_t c1_ev;
  eg_t  c1_eg;
  logic [DIM1-1:0][7:0] c1_feat;
  async_conv #(.DIM(DIM1), .LAYER(3'd1)) u_async_conv1 (
    .clk, .rst_n, .wl, .in_valid(g_valid), .in_ready(g_ready), .in_ev(g_ev),
    .in_edges(g_eg), .out_valid(c1_valid), .out_ready(c1_ready), .out_ev(c1_ev),
    .out_edges(c1_eg), .out_feat(c1_feat), .idle(c1_idle));

  assign async_idle = g_idle && c1_idle;

  // ------------------------------------------------------------- maxpool1 + fm1
  logic          f1_ready, f1_re, f1_we, f1_swap, f1_rstart, f1_ren, f1_rdone;
  logic [A1-1:0] f1_raddr, f1_waddr, f1_ra, f1_rb;
  logic [W1-1:0] f1_q, f1_wdata, f1_qa, f1_qb;
  maxpool_async #(.BETA(BETA), .K(4), .DIM(DIM1)) u_maxpool1 (
    .clk, .rst_n, .in_valid(c1_valid), .in_ready(c1_ready), .in_ev(c1_ev),
    .in_edges(c1_eg), .in_feat(c1_feat), .time_done,
    .fm_ready(f1_ready), .fm_re(f1_re), .fm_raddr(f1_raddr), .fm_q(f1_q),
    .fm_we(f1_we), .fm_waddr(f1_waddr), .fm_wdata(f1_wdata), .fm_swap(f1_swap),
    .late_cnt(stat_late_drops), .merge_cnt(), .drop_edge_cnt(), .resc_edge_cnt(),
    .chan_cnt());
  feature_mem #(.DEPTH(S1 * S1), .W(W1)) u_feature_mem1 (
    .clk, .rst_n, .w_ready(f1_ready), .w_re(f1_re), .w_raddr(f1_raddr), .w_q(f1_q),
    .w_we(f1_we), .w_waddr(f1_waddr), .w_wdata(f1_wdata), .w_swap(f1_swap),
    .r_start(f1_rstart), .r_en(f1_ren), .r_addr_a(f1_ra), .r_addr_b(f1_rb),
    .r_qa(f1_qa), .r_qb(f1_qb), .r_done(f1_rdone), .busy());

  // ------------------------------------------------------------- conv2 -> fm2
  logic c2_valid, c2_ready, c2_vtx, c2_eoc;
  logic [CRD_W-1:0] c2_x, c2_y;
  logic [PNEIGH-1:0] c2_e;
  logic [DIM2-1:0][7:0] c2_feat;
  sync_conv #(.SIZE(S1), .N_IN(DIM1), .DIM(DIM2), .M(M2), .LAYER(3'd2)) u_sync_conv2 (
    .clk, .rst_n, .wl, .fm_r_start(f1_rstart), .fm_r_en(f1_ren),
    .fm_r_addr_a(f1_ra), .fm_r_addr_b(f1_rb), .fm_r_qa(f1_qa), .fm_r_qb(f1_qb),
    .fm_r_done(f1_rdone), .out_valid(c2_valid), .out_ready(c2_ready),
    .out_vtx(c2_vtx), .out_eoc(c2_eoc), .out_x(c2_x), .out_y(c2_y),
    .out_edges(c2_e), .out_feat(c2_feat), .busy());

  logic          f2_ready, f2_rstart, f2_ren, f2_rdone;
  logic [A1-1:0] f2_ra, f2_rb;
  logic [W2-1:0] f2_qa, f2_qb;
  assign c2_ready = f2_ready;
  feature_mem #(.DEPTH(S1 * S1), .W(W2)) u_feature_mem2 (
    .clk, .rst_n, .w_ready(f2_ready), .w_re(1'b0), .w_raddr('0), .w_q(),
    .w_we(c2_valid && c2_vtx && f2_ready),
    .w_waddr(A1'(int'(c2_y) * S1 + int'(c2_x))),
    .w_wdata({1'b1, c2_e, c2_feat}),
    .w_swap(c2_valid && c2_eoc && f2_ready),
    .r_start(f2_rstart), .r_en(f2_ren), .r_addr_a(f2_ra), .r_addr_b(f2_rb),
    .r_qa(f2_qa), .r_qb(f2_qb), .r_done(f2_rdone), .busy());

  // ------------------------------------------------------------- conv3 -> maxpool2 -> fm3
  logic c3_valid, c3_ready, c3_vtx, c3_eoc;
  logic [CRD_W-1:0] c3_x, c3_y;
  logic [PNEIGH-1:0] c3_e;
  logic [DIM3-1:0][7:0] c3_feat;
  sync_conv #(.SIZE(S1), .N_IN(DIM2), .DIM(DIM3), .M(M3), .LAYER(3'd3)) u_sync_conv3 (
    .clk, .rst_n, .wl, .fm_r_start(f2_rstart), .fm_r_en(f2_ren),
    .fm_r_addr_a(f2_ra), .fm_r_addr_b(f2_rb), .fm_r_qa(f2_qa), .fm_r_qb(f2_qb),
    .fm_r_done(f2_rdone), .out_valid(c3_valid), .out_ready(c3_ready),
    .out_vtx(c3_vtx), .out_eoc(c3_eoc), .out_x(c3_x), .out_y(c3_y),
    .out_edges(c3_e), .out_feat(c3_feat), .busy());

  logic          f3_ready, f3_re, f3_we, f3_swap, f3_rstart, f3_ren, f3_rdone;
  logic [A2-1:0] f3_raddr, f3_waddr, f3_ra, f3_rb;
  logic [W3-1:0] f3_q, f3_wdata, f3_qa, f3_qb;
  maxpool_sync #(.SIZE_IN(S1), .KS(2), .KT(2), .DIM(DIM3)) u_maxpool2 (
    .clk, .rst_n, .in_valid(c3_valid), .in_ready(c3_ready), .in_vtx(c3_vtx),
    .in_eoc(c3_eoc), .in_x(c3_x), .in_y(c3_y), .in_edges(c3_e), .in_feat(c3_feat),
    .fm_ready(f3_ready), .fm_re(f3_re), .fm_raddr(f3_raddr), .fm_q(f3_q),
    .fm_we(f3_we), .fm_waddr(f3_waddr), .fm_wdata(f3_wdata), .fm_swap(f3_swap),
    .merge_cnt(), .chan_cnt());
  feature_mem #(.DEPTH(S2 * S2), .W(W3)) u_feature_mem3 (
    .clk, .rst_n, .w_ready(f3_ready), .w_re(f3_re), .w_raddr(f3_raddr), .w_q(f3_q),
    .w_we(f3_we), .w_waddr(f3_waddr), .w_wdata(f3_wdata), .w_swap(f3_swap),
    .r_start(f3_rstart), .r_en(f3_ren), .r_addr_a(f3_ra), .r_addr_b(f3_rb),
    .r_qa(f3_qa), .r_qb(f3_qb), .r_done(f3_rdone), .busy());

  // ------------------------------------------------------------- conv4 -> fm4
  logic c4_valid, c4_ready, c4_vtx, c4_eoc;
  logic [CRD_W-1:0] c4_x, c4_y;
  logic [PNEIGH-1:0] c4_e;
  logic [DIM4-1:0][7:0] c4_feat;
  sync_conv #(.SIZE(S2), .N_IN(DIM3), .DIM(DIM4), .M(M4), .LAYER(3'd4)) u_sync_conv4 (
    .clk, .rst_n, .wl, .fm_r_start(f3_rstart), .fm_r_en(f3_ren),
    .fm_r_addr_a(f3_ra), .fm_r_addr_b(f3_rb), .fm_r_qa(f3_qa), .fm_r_qb(f3_qb),
    .fm_r_done(f3_rdone), .out_valid(c4_valid), .out_ready(c4_ready),
    .out_vtx(c4_vtx), .out_eoc(c4_eoc), .out_x(c4_x), .out_y(c4_y),
    .out_edges(c4_e), .out_feat(c4_feat), .busy());

  logic          f4_ready, f4_rstart, f4_ren, f4_rdone;
  logic [A2-1:0] f4_ra, f4_rb;
  logic [W4-1:0] f4_qa, f4_qb;
  assign c4_ready = f4_ready;
  feature_mem #(.DEPTH(S2 * S2), .W(W4)) u_feature_mem4 (
    .clk, .rst_n, .w_ready(f4_ready), .w_re(1'b0), .w_raddr('0), .w_q(),
    .w_we(c4_valid && c4_vtx && f4_ready),
    .w_waddr(A2'(int'(c4_y) * S2 + int'(c4_x))),
    .w_wdata({1'b1, c4_e, c4_feat}),
    .w_swap(c4_valid && c4_eoc && f4_ready),
    .r_start(f4_rstart), .r_en(f4_ren), .r_addr_a(f4_ra), .r_addr_b(f4_rb),
    .r_qa(f4_qa), .r_qb(f4_qb), .r_done(f4_rdone), .busy());

  // ------------------------------------------------------------- conv5 -> maxpool3 -> fm5
  logic c5_valid, c5_ready, c5_vtx, c5_eoc;
  logic [CRD_W-1:0] c5_x, c5_y;
  logic [PNEIGH-1:0] c5_e;
  logic [DIM5-1:0][7:0] c5_feat;
  sync_conv #(.SIZE(S2), .N_IN(DIM4), .DIM(DIM5), .M(M5), .LAYER(3'd5)) u_sync_conv5 (
    .clk, .rst_n, .wl, .fm_r_start(f4_rstart), .fm_r_en(f4_ren),
    .fm_r_addr_a(f4_ra), .fm_r_addr_b(f4_rb), .fm_r_qa(f4_qa), .fm_r_qb(f4_qb),
    .fm_r_done(f4_rdone), .out_valid(c5_valid), .out_ready(c5_ready),
    .out_vtx(c5_vtx), .out_eoc(c5_eoc), .out_x(c5_x), .out_y(c5_y),
    .out_edges(c5_e), .out_feat(c5_feat), .busy());

  logic          f5_ready, f5_re, f5_we, f5_swap, f5_rstart, f5_ren, f5_rdone;
  logic [A3-1:0] f5_raddr, f5_waddr, f5_ra;
  logic [W5-1:0] f5_q, f5_wdata, f5_qa;
  maxpool_sync #(.SIZE_IN(S2), .KS(K3), .KT(K3), .DIM(DIM5)) u_maxpool3 (
    .clk, .rst_n, .in_valid(c5_valid), .in_ready(c5_ready), .in_vtx(c5_vtx),
    .in_eoc(c5_eoc), .in_x(c5_x), .in_y(c5_y), .in_edges(c5_e), .in_feat(c5_feat),
    .fm_ready(f5_ready), .fm_re(f5_re), .fm_raddr(f5_raddr), .fm_q(f5_q),
    .fm_we(f5_we), .fm_waddr(f5_waddr), .fm_wdata(f5_wdata), .fm_swap(f5_swap),
    .merge_cnt(), .chan_cnt());
  feature_mem #(.DEPTH(S3 * S3), .W(W5)) u_feature_mem5 (
    .clk, .rst_n, .w_ready(f5_ready), .w_re(f5_re), .w_raddr(f5_raddr), .w_q(f5_q),
    .w_we(f5_we), .w_waddr(f5_waddr), .w_wdata(f5_wdata), .w_swap(f5_swap),
    .r_start(f5_rstart), .r_en(f5_ren), .r_addr_a(f5_ra), .r_addr_b('0),
    .r_qa(f5_qa), .r_qb(), .r_done(f5_rdone), .busy());

  // ------------------------------------------------------------- output
  out_serialise #(.CELLS(S3 * S3), .DIM(DIM5), .OUT_W(32)) u_out_serialise (
    .clk, .rst_n, .fm_r_start(f5_rstart), .fm_r_en(f5_ren), .fm_r_addr(f5_ra),
    .fm_r_q(f5_qa), .fm_r_done(f5_rdone), .m_valid, .m_ready, .m_data, .m_last,
    .m_cell_valid, .map_cnt(stat_maps));

  a_beta: assert property (@(posedge clk) (BETA == 128 || BETA == 256 || BETA == 64 || BETA == 32));
endmodule
