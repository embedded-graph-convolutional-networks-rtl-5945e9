// efgcn_pkg -- types, constant tables and arithmetic shared by the EFGCN
// event-graph accelerator.
//
// Contents
//  * nev_t     : a normalised event (x*, y*, t*, polarity). x*/y* are 8 bit,
//                enough for graph sizes up to 256; t* keeps 32 bits so that the
//                temporal-channel index keeps counting on a continuous stream.
//  * eg_t      : the edge list the graph generator attaches to an event: for
//                each of the 29 pixels within radius 3 a valid bit, the
//                neighbour's polarity and its time distance (0..3).
//  * r3_dx/r3_dy : the 29 pixel offsets with dx^2+dy^2 <= 9, row by row.
//  * pooled-graph offsets: after a 4x4x4 (or 2x2x2) pooling every surviving
//    edge points to one of 17 neighbour cells. Index 0 is the vertex itself,
//    1..8 the 8 spatial neighbours in the same temporal channel and 9..17 the
//    9 cells (same x/y included) of the previous channel. An edge vector bit
//    e[i-1] stands for index i.
//  * requant() : 32-bit accumulator -> int8 activation: multiply by a fixed-
//    point scale, arithmetic right shift, add the zero point, saturate.
//  * the weight-load bus layout shared by all convolution layers.
//
// The radius, the 29/17 edge counts and the requantisation steps follow the
// paper; bit widths, ordering of the tables and the load-bus layout are this
// design's own choices.
package efgcn_pkg;

  localparam int TS_W     = 32;   // microsecond timestamps and normalised time
  localparam int CRD_W    = 8;    // normalised coordinate width (beta <= 256)
  localparam int NEIGH    = 29;   // pixels within radius R=3
  localparam int PNEIGH   = 17;   // neighbour cells of a pooled vertex
  localparam int PSTEPS   = 9;    // fetch steps per pooled vertex (2 lanes)

  typedef struct packed {
    logic [TS_W-1:0]  t;
    logic [CRD_W-1:0] x;
    logic [CRD_W-1:0] y;
    logic             p;
  } nev_t;

  typedef struct packed {
    logic [NEIGH-1:0]      valid;
    logic [NEIGH-1:0]      pol;
    logic [NEIGH-1:0][1:0] dt;
  } eg_t;

  // ---------------------------------------------------------------- R=3 disk
  // the 29 offsets with dx^2+dy^2 <= 9, row by row (dy -3..3, dx ascending)
  localparam int R3_DX [NEIGH] = '{ 0,
                                   -2, -1, 0, 1, 2,
                                   -2, -1, 0, 1, 2,
                               -3, -2, -1, 0, 1, 2, 3,
                                   -2, -1, 0, 1, 2,
                                   -2, -1, 0, 1, 2,
                                            0 };
  localparam int R3_DY [NEIGH] = '{-3,
                                   -2, -2, -2, -2, -2,
                                   -1, -1, -1, -1, -1,
                                0,  0,  0,  0,  0,  0,  0,
                                    1,  1,  1,  1,  1,
                                    2,  2,  2,  2,  2,
                                             3 };

  function automatic int r3_dx(input int i);
    return (i >= 0 && i < NEIGH) ? R3_DX[i] : 0;
  endfunction

  function automatic int r3_dy(input int i);
    return (i >= 0 && i < NEIGH) ? R3_DY[i] : 0;
  endfunction

  // ------------------------------------------------------ pooled-graph cells
  // index 0 self; 1..8 same channel; 9..17 previous channel
  localparam int P_DX [PNEIGH+1] = '{0, -1, 0, 1, -1, 1, -1, 0, 1,
                                        -1, 0, 1, -1, 0, 1, -1, 0, 1};
  localparam int P_DY [PNEIGH+1] = '{0, -1, -1, -1, 0, 0, 1, 1, 1,
                                        -1, -1, -1, 0, 0, 0, 1, 1, 1};

  function automatic int p_dx(input int idx);
    return (idx >= 0 && idx <= PNEIGH) ? P_DX[idx] : 0;
  endfunction

  function automatic int p_dy(input int idx);
    return (idx >= 0 && idx <= PNEIGH) ? P_DY[idx] : 0;
  endfunction

  function automatic int p_dt(input int idx);
    return (idx >= 9) ? -1 : 0;
  endfunction

  // Offsets (each -1..1, dt -1..0) -> index 0..17; 0 means "own cell" (the
  // edge is internal to the pooling region and is dropped).
  function automatic int p_index(input int dx, input int dy, input int dt);
    int k;
    k = (dy + 1) * 3 + (dx + 1);
    if (dt == 0) begin
      if (k == 4) return 0;
      return (k < 4) ? k + 1 : k;
    end
    return 9 + k;
  endfunction

  // ------------------------------------------------------- requantisation
  function automatic logic signed [7:0] requant(
      input logic signed [31:0] acc,
      input logic signed [31:0] mult,
      input logic        [5:0]  shift,
      input logic signed [7:0]  zp);
    logic signed [63:0] p;
    p = 64'(acc) * 64'(mult);
    p = p >>> shift;
    p = p + 64'(zp);
    if (p > 64'sd127)  return 8'sd127;
    if (p < -64'sd128) return -8'sd128;
    return p[7:0];
  endfunction

  function automatic logic signed [7:0] sat8(input int v);
    if (v > 127)  return 8'sd127;
    if (v < -128) return -8'sd128;
    return 8'(v);
  endfunction

  function automatic logic signed [7:0] max8(input logic signed [7:0] a,
                                             input logic signed [7:0] b);
    return (a > b) ? a : b;
  endfunction

  // Normalisation of Eq. (2): floor(beta * v / range).
  function automatic logic [TS_W-1:0] norm_time(input logic [TS_W-1:0] t_us,
                                                input int beta,
                                                input int window_us);
    logic [63:0] p;
    p = 64'(t_us) * 64'(beta);
    return TS_W'(p / 64'(window_us));
  endfunction

  // ------------------------------------------------------- weight-load bus
  // One 32-bit write per parameter. For a layer with DIM outputs and NIN
  // inputs (features + 3 position values), NINP = NIN rounded up to a power
  // of two:
  //   addr <  DIM*NINP         : weight[addr / NINP][addr % NINP] = data[7:0]
  //                              (columns >= NIN are ignored)
  //   addr <  DIM*NINP + DIM   : bias[addr - DIM*NINP]            = data
  //   base = DIM*NINP + DIM    : +0 scale (int32), +1 shift (data[5:0]),
  //                              +2 zero point (int8), +3 position LUT step
  typedef struct packed {
    logic        en;
    logic [2:0]  layer;
    logic [15:0] addr;
    logic [31:0] data;
  } wl_t;

  localparam logic signed [31:0] QMULT_RST = 32'sd1;
  localparam logic        [5:0]  QSHIFT_RST = 6'd0;
  localparam logic signed [7:0]  QZP_RST   = 8'sd0;
  localparam logic signed [7:0]  POSQ_RST  = 8'sd1;

endpackage
