// maxpool_sync -- MaxPool on the vertex stream of the synchronous part.
//
// Input is the output stream of a convolution: one beat per vertex
// (vtx=1: cell x,y of the current channel, features, 17-bit edge list) and
// one end-of-channel beat (eoc=1) per temporal channel. Input channels are
// counted; KT of them form one output channel. A vertex goes to output cell
// (x/KS, y/KS) and is merged by read-modify-write into the write bank of the
// next feature memory: element-wise max of the features, OR of the rescaled
// edges. Edges are rescaled as in the first pooling: the neighbour's pooled
// cell minus the vertex's pooled cell, in time the neighbour lies in the
// previous input channel; edges that land in the vertex's own cell are
// dropped. After the KT-th end-of-channel beat the output channel is closed
// with w_swap (waiting for the memory to be ready).
//
// In the EFGCN-B pipeline it is used twice: 2x2x2 after conv3 and, as the
// last layer before the output, KS=KT=(beta/8)/4 after conv5, which leaves a
// 4x4 map every quarter of the time window.
//
// Memory word and stream edges: {valid, edges[16:0], features[DIM*8-1:0]}.
// Two clocks per vertex, one per end-of-channel beat.
//
// Follows the paper: the kernels, the max merge, the 17-edge rescaling.
// Own choices: the stream format and the channel counting.
module maxpool_sync
  import efgcn_pkg::*;
#(
  parameter int SIZE_IN = 32,
  parameter int KS      = 2,
  parameter int KT      = 2,
  parameter int DIM     = 32,
  localparam int SIZE_OUT = SIZE_IN / KS,
  localparam int DEPTH = SIZE_OUT * SIZE_OUT,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int W = DIM * 8 + PNEIGH + 1,
  localparam int LKS = $clog2(KS),
  localparam int CW = (KT > 1) ? $clog2(KT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_vtx,
  input  logic                      in_eoc,
  input  logic [CRD_W-1:0]          in_x,
  input  logic [CRD_W-1:0]          in_y,
  input  logic [PNEIGH-1:0]         in_edges,
  input  logic [DIM-1:0][7:0]       in_feat,
  // feature memory writer port
  input  logic                      fm_ready,
  output logic                      fm_re,
  output logic [AW-1:0]             fm_raddr,
  input  logic [W-1:0]              fm_q,
  output logic                      fm_we,
  output logic [AW-1:0]             fm_waddr,
  output logic [W-1:0]              fm_wdata,
  output logic                      fm_swap,
  output logic [31:0]               merge_cnt,
  output logic [31:0]               chan_cnt
);

  logic [CW-1:0] sub;              // input channel within the output channel
  logic          pend;
  logic [AW-1:0] p_addr;
  logic [DIM-1:0][7:0] p_feat;
  logic [PNEIGH-1:0]   p_edges;

  logic last_sub;
  assign last_sub = (int'(sub) == KT - 1);

  assign in_ready = !pend && (in_eoc ? (!last_sub || fm_ready) : fm_ready);
  assign fm_swap  = in_valid && in_ready && in_eoc && last_sub;

  logic accept;
  assign accept   = in_valid && in_ready && in_vtx && !in_eoc;
  assign fm_re    = accept;
  assign fm_raddr = AW'((int'(in_y) >> LKS) * SIZE_OUT + (int'(in_x) >> LKS));

  logic [PNEIGH-1:0] e_vec;
  always_comb begin
    int nx, ny, pdx, pdy, pdt, idx;
    e_vec = '0;
    nx = 0; ny = 0; pdx = 0; pdy = 0; pdt = 0; idx = 0;
    for (int i = 1; i <= PNEIGH; i++) begin
      if (in_edges[i-1]) begin
        nx  = int'(in_x) + p_dx(i);
        ny  = int'(in_y) + p_dy(i);
        pdx = (nx >>> LKS) - (int'(in_x) >>> LKS);
        pdy = (ny >>> LKS) - (int'(in_y) >>> LKS);
        pdt = (p_dt(i) < 0 && sub == '0) ? -1 : 0;
        idx = p_index(pdx, pdy, pdt);
        if (idx != 0) e_vec[idx-1] = 1'b1;
      end
    end
  end

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
      sub <= '0; pend <= 1'b0; p_addr <= '0; p_feat <= '0; p_edges <= '0;
      merge_cnt <= '0; chan_cnt <= '0;
    end else begin
      pend <= accept;
      if (accept) begin
        p_addr <= fm_raddr; p_feat <= in_feat; p_edges <= e_vec;
      end
      if (pend && fm_q[W-1]) merge_cnt <= merge_cnt + 1;
      if (in_valid && in_ready && in_eoc) begin
        sub <= last_sub ? '0 : sub + 1'b1;
        if (last_sub) chan_cnt <= chan_cnt + 1;
      end
    end
  end
endmodule
