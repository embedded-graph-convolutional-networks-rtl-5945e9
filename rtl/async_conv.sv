// async_conv -- first graph convolution (PointNetConv), event by event.
//
// For each event the message function is applied to 30 input vectors: the
// self-loop and one vector per edge (29 at most). A vector holds 4 values:
// the neighbour's polarity (+1/-1) and its position relative to the event,
// (dx, dy, -dt), each multiplied by the layer's position step pos_q; the
// self-loop has position (0,0,0). Two matrix-vector units (LANES) each
// compute all DIM outputs of one vector per clock, so an event takes
// 30/2 = 15 clocks, matching the edge generator. Every output gets its bias,
// is requantised (scale, shift, + zero point) and enters an element-wise
// running max over the valid vectors; the final max is clamped below at the
// zero point (ReLU).
//
// Pipeline: cycle p (0..14) of an event computes vectors 2p and 2p+1 and
// registers the requantised results; the next stage folds them into the max.
// out_valid rises two clocks after the last pair. A new event is taken in
// the cycle its predecessor computes its last pair, so throughput is one
// event per 15 clocks while the output is consumed; a blocked output freezes
// the pipeline. Weights (DIM x 4 int8), biases (int32) and the quantisation
// constants are written through the load bus (see efgcn_pkg); they are held
// in registers, i.e. distributed RAM as in the paper.
//
// Follows the paper: 4 inputs -> 16 outputs, two parallel units, 15 clocks,
// requantisation with a zero point, max aggregation, ReLU as a minimum.
// Own choices: encoding of polarity and positions, load-bus layout,
// truncating shift, input zero point folded into the bias.
module async_conv
  import efgcn_pkg::*;
#(
  parameter int          DIM   = 16,
  parameter logic [2:0]  LAYER = 3'd1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  wl_t                    wl,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  nev_t                   in_ev,
  input  eg_t                    in_edges,
  output logic                   out_valid,
  input  logic                   out_ready,
  output nev_t                   out_ev,
  output eg_t                    out_edges,
  output logic [DIM-1:0][7:0]    out_feat,
  output logic                   idle
);
  localparam int NIN   = 4;
  localparam int LANES = 2;
  localparam int PAIRS = (NEIGH + 1) / LANES;   // 15

  // ---------------------------------------------------------- parameters
  logic signed [7:0]  w    [DIM][NIN];
  logic signed [31:0] bias [DIM];
  logic signed [31:0] qmult;
  logic        [5:0]  qshift;
  logic signed [7:0]  qzp, posq;

  localparam int WBASE = DIM * NIN;
  localparam int QBASE = WBASE + DIM;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < DIM; o++) begin
        bias[o] <= '0;
        for (int i = 0; i < NIN; i++) w[o][i] <= '0;
      end
      qmult <= QMULT_RST; qshift <= QSHIFT_RST; qzp <= QZP_RST; posq <= POSQ_RST;
    end else if (wl.en && wl.layer == LAYER) begin
      if (int'(wl.addr) < WBASE)
        w[int'(wl.addr) / NIN][int'(wl.addr) % NIN] <= wl.data[7:0];
      else if (int'(wl.addr) < QBASE)
        bias[int'(wl.addr) - WBASE] <= wl.data;
      else if (int'(wl.addr) == QBASE)     qmult  <= wl.data;
      else if (int'(wl.addr) == QBASE + 1) qshift <= wl.data[5:0];
      else if (int'(wl.addr) == QBASE + 2) qzp    <= wl.data[7:0];
      else if (int'(wl.addr) == QBASE + 3) posq   <= wl.data[7:0];
    end
  end

  // ---------------------------------------------------------- compute stage
  logic       busy;
  logic [3:0] p;
  nev_t       ev;
  eg_t        eg;
  logic       adv;

  assign adv      = !(out_valid && !out_ready);
  assign in_ready = adv && (!busy || p == 4'(PAIRS-1));

  // input vector of vector index v (0 = self-loop)
  function automatic void mkvec(input int v, input nev_t e, input eg_t g,
                                input logic signed [7:0] pq,
                                output logic signed [7:0] x [NIN],
                                output logic vld);
    int j;
    if (v == 0) begin
      x[0] = e.p ? 8'sd1 : -8'sd1;
      x[1] = '0; x[2] = '0; x[3] = '0;
      vld  = 1'b1;
    end else begin
      j    = v - 1;
      x[0] = g.pol[j] ? 8'sd1 : -8'sd1;
      x[1] = sat8(r3_dx(j) * int'(pq));
      x[2] = sat8(r3_dy(j) * int'(pq));
      x[3] = sat8(-int'(g.dt[j]) * int'(pq));
      vld  = g.valid[j];
    end
  endfunction

  logic signed [7:0] y_n   [LANES][DIM];
  logic              v_n   [LANES];
  always_comb begin
    logic signed [7:0]  x [NIN];
    logic signed [31:0] acc;
    for (int l = 0; l < LANES; l++) begin
      mkvec(int'(p) * LANES + l, ev, eg, posq, x, v_n[l]);
      for (int o = 0; o < DIM; o++) begin
        acc = bias[o];
        for (int i = 0; i < NIN; i++) acc = acc + 32'(x[i]) * 32'(w[o][i]);
        y_n[l][o] = requant(acc, qmult, qshift, qzp);
      end
    end
  end

  // stage 1 registers
  logic              s1_act, s1_first, s1_last;
  logic signed [7:0] s1_y [LANES][DIM];
  logic              s1_v [LANES];
  nev_t              s1_ev;
  eg_t               s1_eg;
  // running max
  logic signed [7:0] mx [DIM];

  logic signed [7:0] mx_n [DIM];
  always_comb begin
    for (int o = 0; o < DIM; o++) begin
      mx_n[o] = s1_first ? -8'sd128 : mx[o];
      for (int l = 0; l < LANES; l++)
        if (s1_v[l]) mx_n[o] = max8(mx_n[o], s1_y[l][o]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; p <= '0; ev <= '0; eg <= '0;
      s1_act <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_ev <= '0; s1_eg <= '0;
      for (int l = 0; l < LANES; l++) begin
        s1_v[l] <= 1'b0;
        for (int o = 0; o < DIM; o++) s1_y[l][o] <= '0;
      end
      for (int o = 0; o < DIM; o++) mx[o] <= '0;
      out_valid <= 1'b0; out_ev <= '0; out_edges <= '0; out_feat <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        // compute stage bookkeeping
        if (in_valid && in_ready) begin
          busy <= 1'b1; p <= '0; ev <= in_ev; eg <= in_edges;
        end else if (busy) begin
          if (p == 4'(PAIRS-1)) busy <= 1'b0;
          else p <= p + 1'b1;
        end
        s1_act   <= busy;
        s1_first <= busy && (p == 4'd0);
        s1_last  <= busy && (p == 4'(PAIRS-1));
        s1_ev    <= ev;
        s1_eg    <= eg;
        s1_y     <= y_n;
        s1_v     <= v_n;
        // max stage
        if (s1_act) begin
          mx <= mx_n;
          if (s1_last)
            for (int o = 0; o < DIM; o++) out_feat[o] <= max8(mx_n[o], qzp);
          if (s1_last) begin
            out_valid <= 1'b1;
            out_ev    <= s1_ev;
            out_edges <= s1_eg;
          end
        end
      end
    end
  end

  assign idle = !busy && !s1_act && !out_valid;

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);
endmodule
