// maxpool_async -- first 3D MaxPool (4x4x4), applied to the event stream.
//
// Every event leaving the first convolution is assigned to the cell
// (x/4, y/4) of the temporal channel t*/4 and merged into the feature memory
// by one read and one write: element-wise max of the features, OR of the
// edge list, valid set. The event's edges (up to 29, radius 3) are rescaled
// to the pooled graph: the neighbour's pooled position minus the event's
// pooled position is always in {-1,0,1} x {-1,0,1} x {-1,0}, one of 17
// cells; an edge whose neighbour falls into the event's own cell is dropped.
// Coordinates are thus divided by 4 and edges stay directed with time.
//
// Channel closing: the open channel cur is closed (w_swap) when an event of
// a later channel arrives, or when time_done -- a normalised time before
// which every event has been delivered -- reaches 4*(cur+1). Closing waits
// for the feature memory to be ready; meanwhile no event is accepted. An
// event of an already closed channel is dropped and counted.
//
// Memory word: {valid, edges[16:0], features[DIM*8-1:0]}, address
// (y/4)*(BETA/4) + x/4. Two clocks per event (read, then write).
//
// Follows the paper: 4x4x4 kernel, (SIZE/4)^2 cells addressed by x and y,
// a single read and write per event, 17 edges, time unit TW/(SIZE/4).
// Own choices: the closing rule and the dropping of late events.
module maxpool_async
  import efgcn_pkg::*;
#(
  parameter int BETA = 128,
  parameter int K    = 4,
  parameter int DIM  = 16,
  localparam int SIZE = BETA / K,
  localparam int AW = $clog2(SIZE * SIZE),
  localparam int W = DIM * 8 + PNEIGH + 1,
  localparam int LK = $clog2(K)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  nev_t                   in_ev,
  input  eg_t                    in_edges,
  input  logic [DIM-1:0][7:0]    in_feat,
  input  logic [TS_W-1:0]        time_done,
  // feature memory writer port
  input  logic                   fm_ready,
  output logic                   fm_re,
  output logic [AW-1:0]          fm_raddr,
  input  logic [W-1:0]           fm_q,
  output logic                   fm_we,
  output logic [AW-1:0]          fm_waddr,
  output logic [W-1:0]           fm_wdata,
  output logic                   fm_swap,
  // statistics
  output logic [31:0]            late_cnt,
  output logic [31:0]            merge_cnt,
  output logic [31:0]            drop_edge_cnt,
  output logic [31:0]            resc_edge_cnt,
  output logic [31:0]            chan_cnt
);

  logic [TS_W-1:0] cur;            // open output channel
  logic            pend;           // read issued, write due
  logic [AW-1:0]   p_addr;
  logic [DIM-1:0][7:0] p_feat;
  logic [PNEIGH-1:0]   p_edges;
  logic [5:0]          p_ndrop, p_nresc;

  logic [TS_W-1:0] ev_ch;
  logic close_ev, close_time, need_close, late;
  assign ev_ch      = in_ev.t >> LK;
  assign close_ev   = in_valid && (ev_ch > cur);
  assign close_time = (time_done >> LK) > cur;
  assign need_close = close_ev || close_time;
  assign late       = in_valid && (ev_ch < cur);

  assign fm_swap  = !pend && need_close && fm_ready;
  assign in_ready = !pend && ((!need_close && fm_ready) || late);

  logic accept;
  assign accept = in_valid && in_ready && !late;

  assign fm_re    = accept;
  assign fm_raddr = AW'((int'(in_ev.y) >> LK) * SIZE + (int'(in_ev.x) >> LK));

  // edge rescaling (narrow arithmetic: offsets are at most 3 pixels/steps)
  logic [PNEIGH-1:0] e_vec;
  logic [5:0]        n_drop, n_resc;
  always_comb begin
    logic signed [10:0] ox, oy, nx, ny, tl, pdx, pdy, pdt;
    int idx;
    e_vec = '0; n_drop = '0; n_resc = '0;
    ox = 11'(in_ev.x); oy = 11'(in_ev.y);
    nx = '0; ny = '0; tl = '0; pdx = '0; pdy = '0; pdt = '0; idx = 0;
    for (int i = 0; i < NEIGH; i++) begin
      if (in_edges.valid[i]) begin
        nx  = ox + 11'(r3_dx(i));
        ny  = oy + 11'(r3_dy(i));
        tl  = 11'(in_ev.t[LK-1:0]) - 11'(in_edges.dt[i]);
        pdx = (nx >>> LK) - (ox >>> LK);
        pdy = (ny >>> LK) - (oy >>> LK);
        pdt = tl >>> LK;
        if (pdx < -1 || pdx > 1 || pdy < -1 || pdy > 1 || pdt < -1) idx = 0;
        else idx = p_index(int'(pdx), int'(pdy), int'(pdt));
        if (idx == 0) n_drop = n_drop + 1'b1;
        else begin
          e_vec[idx-1] = 1'b1;
          n_resc = n_resc + 1'b1;
        end
      end
    end
  end

  // merge
  logic [W-1:0] merged;
  always_comb begin
    merged = fm_q;
    merged[W-1] = 1'b1;
    merged[DIM*8 +: PNEIGH] = p_edges | (fm_q[W-1] ? fm_q[DIM*8 +: PNEIGH] : '0);
    for (int o = 0; o < DIM; o++)
      merged[o*8 +: 8] = fm_q[W-1] ? max8(fm_q[o*8 +: 8], p_feat[o]) : p_feat[o];
  end
  assign fm_we    = pend;
  assign fm_waddr = p_addr;
  assign fm_wdata = merged;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; pend <= 1'b0; p_addr <= '0; p_feat <= '0; p_edges <= '0;
      p_ndrop <= '0; p_nresc <= '0;
      late_cnt <= '0; merge_cnt <= '0; drop_edge_cnt <= '0; resc_edge_cnt <= '0;
      chan_cnt <= '0;
    end else begin
      if (fm_swap) begin
        cur <= cur + 1'b1;
        chan_cnt <= chan_cnt + 1;
      end
      if (in_valid && in_ready && late) late_cnt <= late_cnt + 1;
      pend <= accept;
      if (accept) begin
        p_addr <= fm_raddr; p_feat <= in_feat; p_edges <= e_vec;
        p_ndrop <= n_drop; p_nresc <= n_resc;
      end
      if (pend) begin
        if (fm_q[W-1]) merge_cnt <= merge_cnt + 1;
        drop_edge_cnt <= drop_edge_cnt + 32'(p_ndrop);
        resc_edge_cnt <= resc_edge_cnt + 32'(p_nresc);
      end
    end
  end
endmodule
