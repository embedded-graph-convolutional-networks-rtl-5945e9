// sync_conv -- graph convolution (PointNetConv) over one temporal channel of
// the synchronous part.
//
// When the input feature memory announces a channel (fm_r_start) every cell
// of the SIZE x SIZE map is visited in raster order with fixed timing, empty
// or not, so that a channel always takes SIZE*SIZE*9*DIM/M clocks (Eq. 7/8
// of the paper; e.g. 32*32*9*32 = 294912 clocks = 1474.56 us at 200 MHz for
// conv2 of EFGCN-B). A cell is processed in 9 steps. In step s lane A reads
// bank n-1 (the channel being processed) at the vertex itself (s=0) or its
// s-th spatial neighbour, and lane B reads bank n-2 (previous channel) at the
// s-th of the 9 cells around the same x,y. A lane's vector counts only if the
// vertex exists and its stored edge list has that neighbour. The vector is
// the neighbour's N_IN features followed by three position differences from
// a small look-up (-1/0/+1 times the layer's position step). M vector
// multipliers per lane produce M outputs per clock, so each step lasts
// k = DIM/M clocks; every output gets its bias, is requantised and folded
// into an element-wise running max; after step 8 the max, clamped below at
// the zero point (ReLU), is emitted together with the vertex's own edge list.
//
// Pipeline: address/weight-row read (1 clock), multiply-accumulate
// (registered), requantise + max (registered), output register. Output
// stream beats: vertex (out_vtx) or end of channel (out_eoc, after the last
// cell; fm_r_done pulses with it). A blocked output freezes the pipeline.
// Weights DIM x (N_IN+3) int8, biases int32 and quantisation constants come
// over the load bus (layout in efgcn_pkg); weights and biases are held in
// small RAMs without reset and must be loaded before use.
//
// Follows the paper: two lanes on banks n-1 and n-2, 18 vectors in 9 steps,
// m parallel multipliers and k = dim/m clocks per vector, max aggregation,
// ReLU with zero point, position look-up. Own choices: raster order, the
// look-up contents, the stream format and the load-bus layout.
module sync_conv
  import efgcn_pkg::*;
#(
  parameter int         SIZE  = 32,
  parameter int         N_IN  = 16,
  parameter int         DIM   = 32,
  parameter int         M     = 1,
  parameter logic [2:0] LAYER = 3'd2,
  localparam int CELLS = SIZE * SIZE,
  localparam int AW = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int WI = N_IN * 8 + PNEIGH + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  wl_t                   wl,
  // reader side of the input feature memory
  input  logic                  fm_r_start,
  output logic                  fm_r_en,
  output logic [AW-1:0]         fm_r_addr_a,
  output logic [AW-1:0]         fm_r_addr_b,
  input  logic [WI-1:0]         fm_r_qa,
  input  logic [WI-1:0]         fm_r_qb,
  output logic                  fm_r_done,
  // output stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic                  out_vtx,
  output logic                  out_eoc,
  output logic [CRD_W-1:0]      out_x,
  output logic [CRD_W-1:0]      out_y,
  output logic [PNEIGH-1:0]     out_edges,
  output logic [DIM-1:0][7:0]   out_feat,
  output logic                  busy
);
  localparam int NIN   = N_IN + 3;
  localparam int IW    = $clog2(NIN);
  localparam int NINP  = 1 << IW;          // weight rows padded to a power of 2
  localparam int K     = DIM / M;
  localparam int KW    = (K > 1) ? $clog2(K) : 1;
  localparam int LSZ   = $clog2(SIZE);
  localparam int OW    = (DIM > 1) ? $clog2(DIM) : 1;
  localparam int WBASE = DIM * NINP;
  localparam int QBASE = WBASE + DIM;

  // ---------------------------------------------------------- parameters
  // Weights and biases live in small RAMs (one per weight column, one for
  // the biases) read one output row per clock; only the four quantisation
  // constants are registers with a reset value.
  logic signed [7:0]  qzp, posq;
  logic signed [31:0] qmult;
  logic        [5:0]  qshift;
  logic               w_we, b_we;
  logic [OW-1:0]      w_o, b_o;
  logic [IW-1:0]      w_i;
  assign w_we = wl.en && wl.layer == LAYER && int'(wl.addr) < WBASE;
  assign w_o  = OW'(int'(wl.addr) >> IW);
  assign w_i  = IW'(wl.addr);
  assign b_we = wl.en && wl.layer == LAYER && int'(wl.addr) >= WBASE && int'(wl.addr) < QBASE;
  assign b_o  = OW'(int'(wl.addr) - WBASE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qmult <= QMULT_RST; qshift <= QSHIFT_RST; qzp <= QZP_RST; posq <= POSQ_RST;
    end else if (wl.en && wl.layer == LAYER) begin
      if (int'(wl.addr) == QBASE)          qmult  <= wl.data;
      else if (int'(wl.addr) == QBASE + 1) qshift <= wl.data[5:0];
      else if (int'(wl.addr) == QBASE + 2) qzp    <= wl.data[7:0];
      else if (int'(wl.addr) == QBASE + 3) posq   <= wl.data[7:0];
    end
  end

  logic adv;
  assign adv = !(out_valid && !out_ready);

  // ---------------------------------------------------------- stage 0: counters
  logic          run;
  logic [AW-1:0] cix;
  logic [3:0]    s;
  logic [KW-1:0] j;

  function automatic logic nb_ok(input logic [AW-1:0] c, input int idx);
    int x, y;
    x = int'(c) % SIZE + p_dx(idx);
    y = int'(c) / SIZE + p_dy(idx);
    return (x >= 0) && (x < SIZE) && (y >= 0) && (y < SIZE);
  endfunction

  function automatic logic [AW-1:0] nb_addr(input logic [AW-1:0] c, input int idx);
    int x, y;
    x = int'(c) % SIZE + p_dx(idx);
    y = int'(c) / SIZE + p_dy(idx);
    if (x < 0 || x >= SIZE || y < 0 || y >= SIZE) return '0;
    return AW'(y * SIZE + x);
  endfunction

  assign fm_r_en     = adv && run && (j == '0);
  assign fm_r_addr_a = nb_addr(cix, int'(s));
  assign fm_r_addr_b = nb_addr(cix, int'(s) + PSTEPS);

  // weight rows of this clock, registered (block-RAM style read)
  logic signed [7:0]  wq [M][NIN];
  logic signed [31:0] bq [M];
  for (genvar i = 0; i < NIN; i++) begin : g_wcol
    logic signed [7:0] wm [DIM];
    always_ff @(posedge clk) begin
      if (w_we && w_i == IW'(i)) wm[w_o] <= wl.data[7:0];
      if (adv) for (int r = 0; r < M; r++) wq[r][i] <= wm[int'(j)*M + r];
    end
  end
  logic signed [31:0] bm [DIM];
  always_ff @(posedge clk) begin
    if (b_we) bm[b_o] <= wl.data;
    if (adv) for (int r = 0; r < M; r++) bq[r] <= bm[int'(j)*M + r];
  end

  // ---------------------------------------------------------- stage 1
  logic          a1, inr_a1, inr_b1;
  logic [AW-1:0] cix1;
  logic [3:0]    s1;
  logic [KW-1:0] j1;
  logic [PNEIGH-1:0] se_r;   // edges of the vertex being processed
  logic              sv_r;   // vertex exists

  logic [PNEIGH-1:0] se_c;
  logic              sv_c, va_c, vb_c;
  always_comb begin
    se_c = (s1 == 4'd0) ? fm_r_qa[N_IN*8 +: PNEIGH] : se_r;
    sv_c = (s1 == 4'd0) ? fm_r_qa[WI-1] : sv_r;
    if (s1 == 4'd0) va_c = fm_r_qa[WI-1];
    else            va_c = sv_c && se_c[int'(s1) - 1] && inr_a1 && fm_r_qa[WI-1];
    vb_c = sv_c && se_c[int'(s1) + 7 + 1] && inr_b1 && fm_r_qb[WI-1];
  end

  function automatic logic signed [7:0] lut(input int d, input logic signed [7:0] pq);
    return sat8(d * int'(pq));
  endfunction

  logic signed [31:0] acc_n [2][M];
  always_comb begin
    logic signed [7:0] xa [NIN];
    logic signed [7:0] xb [NIN];
    for (int i = 0; i < N_IN; i++) begin
      xa[i] = fm_r_qa[i*8 +: 8];
      xb[i] = fm_r_qb[i*8 +: 8];
    end
    xa[N_IN]   = lut(p_dx(int'(s1)), posq);
    xa[N_IN+1] = lut(p_dy(int'(s1)), posq);
    xa[N_IN+2] = '0;
    xb[N_IN]   = lut(p_dx(int'(s1) + PSTEPS), posq);
    xb[N_IN+1] = lut(p_dy(int'(s1) + PSTEPS), posq);
    xb[N_IN+2] = lut(-1, posq);
    for (int r = 0; r < M; r++) begin
      acc_n[0][r] = bq[r];
      acc_n[1][r] = bq[r];
      for (int i = 0; i < NIN; i++) begin
        acc_n[0][r] = acc_n[0][r] + 32'(xa[i]) * 32'(wq[r][i]);
        acc_n[1][r] = acc_n[1][r] + 32'(xb[i]) * 32'(wq[r][i]);
      end
    end
  end

  // ---------------------------------------------------------- stage 2
  logic               a2, va2, vb2, first2, last2, sv2;
  logic [AW-1:0]      cix2;
  logic [KW-1:0]      j2;
  logic [PNEIGH-1:0]  se2;
  logic signed [31:0] acc2 [2][M];

  // ---------------------------------------------------------- stage 3: max
  logic signed [7:0] mx [DIM];
  logic signed [7:0] mx_n [DIM];
  always_comb begin
    for (int o = 0; o < DIM; o++) mx_n[o] = first2 ? -8'sd128 : mx[o];
    for (int r = 0; r < M; r++) begin
      if (va2) mx_n[int'(j2)*M + r] = max8(mx_n[int'(j2)*M + r],
                                           requant(acc2[0][r], qmult, qshift, qzp));
      if (vb2) mx_n[int'(j2)*M + r] = max8(mx_n[int'(j2)*M + r],
                                           requant(acc2[1][r], qmult, qshift, qzp));
    end
  end

  logic eoc_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cix <= '0; s <= '0; j <= '0;
      a1 <= 1'b0; inr_a1 <= 1'b0; inr_b1 <= 1'b0; cix1 <= '0; s1 <= '0; j1 <= '0;
      se_r <= '0; sv_r <= 1'b0;
      a2 <= 1'b0; va2 <= 1'b0; vb2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0; sv2 <= 1'b0;
      cix2 <= '0; j2 <= '0; se2 <= '0;
      for (int l = 0; l < 2; l++) for (int r = 0; r < M; r++) acc2[l][r] <= '0;
      for (int o = 0; o < DIM; o++) mx[o] <= '0;
      eoc_pend <= 1'b0; fm_r_done <= 1'b0;
      out_valid <= 1'b0; out_vtx <= 1'b0; out_eoc <= 1'b0; out_x <= '0; out_y <= '0;
      out_edges <= '0; out_feat <= '0;
    end else begin
      fm_r_done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fm_r_start) begin
        run <= 1'b1; cix <= '0; s <= '0; j <= '0;
      end
      if (adv) begin
        // stage 0
        if (run && !fm_r_start) begin
          if (j == KW'(K-1)) begin
            j <= '0;
            if (s == 4'(PSTEPS-1)) begin
              s <= '0;
              if (cix == AW'(CELLS-1)) run <= 1'b0;
              else cix <= cix + 1'b1;
            end else s <= s + 1'b1;
          end else j <= j + 1'b1;
        end
        a1     <= run && !fm_r_start;
        inr_a1 <= nb_ok(cix, int'(s));
        inr_b1 <= nb_ok(cix, int'(s) + PSTEPS);
        cix1  <= cix; s1 <= s; j1 <= j;
        // stage 1
        if (a1 && s1 == 4'd0 && j1 == '0) begin
          se_r <= se_c; sv_r <= sv_c;
        end
        a2     <= a1;
        va2    <= a1 && va_c;
        vb2    <= a1 && vb_c;
        first2 <= a1 && (s1 == 4'd0) && (j1 == '0);
        last2  <= a1 && (s1 == 4'(PSTEPS-1)) && (j1 == KW'(K-1));
        sv2    <= sv_c;
        se2    <= se_c;
        cix2  <= cix1;
        j2     <= j1;
        acc2   <= acc_n;
        // stage 3
        if (a2) begin
          mx <= mx_n;
          if (last2) begin
            if (sv2) begin
              out_valid <= 1'b1; out_vtx <= 1'b1; out_eoc <= 1'b0;
              out_x     <= CRD_W'(int'(cix2) % SIZE);
              out_y     <= CRD_W'(int'(cix2) >> LSZ);
              out_edges <= se2;
              for (int o = 0; o < DIM; o++) out_feat[o] <= max8(mx_n[o], qzp);
            end
            if (cix2 == AW'(CELLS-1)) eoc_pend <= 1'b1;
          end
        end
      end
      if (eoc_pend && !out_valid && !(adv && a2 && last2)) begin
        eoc_pend  <= 1'b0;
        out_valid <= 1'b1; out_vtx <= 1'b0; out_eoc <= 1'b1;
        fm_r_done <= 1'b1;
      end
    end
  end

  assign busy = run || a1 || a2 || eoc_pend;

  a_k_integer: assert property (@(posedge clk) (K * M == DIM));
endmodule
