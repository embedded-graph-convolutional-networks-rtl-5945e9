// generate_graph -- the graph-generation stage: normaliser, event FIFO and
// edge generator with its neighbourhood matrix, in that order.
//
// Raw events (sensor x, y, microsecond timestamp, polarity) are normalised to
// the BETA x BETA x BETA graph, buffered in a block-RAM FIFO and turned, one
// every 15 clocks, into an event plus its list of up to 29 directed edges.
// The FIFO absorbs bursts above the edge generator's rate; when it is full,
// events are dropped and counted (fifo_drops). idle is high when no event is
// held anywhere in the stage, which the first pooling layer uses to close
// temporal channels when the input is quiet.
//
// Structure and the 15-clock rate follow the paper; the FIFO depth and the
// drop-on-full behaviour are this design's choices.
module generate_graph
  import efgcn_pkg::*;
#(
  parameter int BETA           = 128,
  parameter int SENSOR_X       = 120,
  parameter int SENSOR_Y       = 100,
  parameter int TIME_WINDOW_US = 100000,
  parameter int FIFO_DEPTH     = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ev_valid,
  input  logic [8:0]      ev_x,
  input  logic [8:0]      ev_y,
  input  logic [TS_W-1:0] ev_t,
  input  logic            ev_p,
  output logic            out_valid,
  input  logic            out_ready,
  output nev_t            out_ev,
  output eg_t             out_edges,
  output logic            idle,
  output logic [31:0]     fifo_drops,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level
);
  logic n_valid;
  nev_t n_ev;
  logic f_full, f_empty, f_rd;
  nev_t f_q;
  logic eg_idle;

  normalise #(.BETA(BETA), .SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y),
              .TIME_WINDOW_US(TIME_WINDOW_US)) u_normalise (
    .clk, .rst_n, .in_valid(ev_valid), .in_x(ev_x), .in_y(ev_y), .in_t(ev_t),
    .in_p(ev_p), .out_valid(n_valid), .out_ev(n_ev));

  event_fifo #(.W($bits(nev_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(n_valid), .wr_data(n_ev), .full(f_full),
    .rd_en(f_rd), .rd_data(f_q), .empty(f_empty), .overflow_cnt(fifo_drops),
    .level(fifo_level));

  logic eg_in_ready;
  edges_gen #(.BETA(BETA)) u_edges_gen (
    .clk, .rst_n, .in_valid(!f_empty), .in_ready(eg_in_ready), .in_ev(f_q),
    .out_valid, .out_ready, .out_ev, .out_edges, .idle(eg_idle));

  assign f_rd = !f_empty && eg_in_ready;
  assign idle = !ev_valid && !n_valid && f_empty && (fifo_level == '0) && eg_idle;

  logic unused;
  assign unused = f_full;
endmodule
