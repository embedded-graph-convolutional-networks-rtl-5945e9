// edges_gen -- builds the directed edges of one new event from the
// neighbourhood matrix (NM), then records the event in the NM.
//
// For every event the 29 NM cells within radius 3 of its pixel (the pixel
// itself included) are read: offsets 0..14 on port A in cycles 0..14, offsets
// 15..28 on port B in cycles 0..13, and in cycle 14 port B writes the event
// into its own cell. An event therefore occupies the NM for exactly 15 clocks
// and the next event may start right after: 13.3 M events/s at 200 MHz.
// A cell becomes an edge when it is valid and its stored timestamp satisfies
// dx^2 + dy^2 + dt^2 <= R^2 with dt = t*_new - t*_stored (modulo 2^TSB,
// TSB = log2(BETA)); since the stored event is older the edge is directed with
// time and no existing vertex ever needs an update. The edge list carries
// the neighbour's polarity and dt for the first convolution.
//
// After reset the NM is swept to empty (BETA*BETA cycles); in_ready stays low
// meanwhile. Handshakes are valid/ready on both sides. If the output register
// is still occupied when a result is due, the whole block freezes (the NM
// ports are disabled, so their read data are held).
//
// Follows the paper: radius 3, 29 candidates, 15 + 14 reads and one write
// split over the two ports, 15 clocks per event. Own choices: the cell word
// layout, the <= test (the paper says "smaller than R" but counts 29 cells,
// which needs <=) and the handshakes.
module edges_gen
  import efgcn_pkg::*;
#(
  parameter int BETA = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  nev_t  in_ev,
  output logic  out_valid,
  input  logic  out_ready,
  output nev_t  out_ev,
  output eg_t   out_edges,
  output logic  idle
);
  localparam int TSB   = $clog2(BETA);
  localparam int AW    = 2 * TSB;
  localparam int DEPTH = BETA * BETA;
  localparam int W     = TSB + 2;
  localparam int CYC   = 15;

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_RUN} st_t;
  st_t st;

  logic [AW-1:0] init_addr;
  logic [3:0]    c;            // cycle within the event, 0..14
  nev_t          ev;           // event being read
  logic          adv;          // pipeline advance

  // evaluation stage (one cycle behind the reads)
  logic          e_act, e_last;
  logic [3:0]    e_c;
  logic          e_inr_a, e_inr_b;
  nev_t          e_ev;
  eg_t           acc;

  // NM ports
  logic            a_en, b_en, b_we;
  logic [AW-1:0]   a_addr, b_addr;
  logic [W-1:0]    a_q, b_q, b_wdata;

  nm_ram #(.DEPTH(DEPTH), .W(W)) u_nm (
    .clk, .a_en, .a_addr, .a_q, .b_en, .b_we, .b_addr, .b_wdata, .b_q);

  // candidate address and range check
  function automatic logic inrange(input nev_t e, input int i);
    int nx, ny;
    nx = int'(e.x) + r3_dx(i);
    ny = int'(e.y) + r3_dy(i);
    return (nx >= 0) && (nx < BETA) && (ny >= 0) && (ny < BETA);
  endfunction

  function automatic logic [AW-1:0] caddr(input nev_t e, input int i);
    int nx, ny;
    nx = int'(e.x) + r3_dx(i);
    ny = int'(e.y) + r3_dy(i);
    return AW'(ny * BETA + nx);
  endfunction

  logic run_now, start_now, fin_now;
  assign fin_now   = e_act && e_last;
  assign adv       = !(fin_now && out_valid && !out_ready);
  assign run_now   = (st == S_RUN);
  assign in_ready  = adv && ((st == S_IDLE) || (run_now && c == 4'(CYC-1)));
  assign start_now = in_valid && in_ready;
  assign idle      = (st == S_IDLE) && !e_act && !out_valid;

  int ia, ib;
  always_comb begin
    ia = int'(c);
    ib = int'(c) + CYC;
    a_en    = 1'b0; a_addr = '0;
    b_en    = 1'b0; b_we   = 1'b0; b_addr = '0; b_wdata = '0;
    if (st == S_INIT) begin
      b_en = 1'b1; b_we = 1'b1; b_addr = init_addr; b_wdata = '0;
    end else if (run_now && adv) begin
      a_en   = inrange(ev, ia);
      a_addr = caddr(ev, ia);
      if (c == 4'(CYC-1)) begin
        b_en = 1'b1; b_we = 1'b1; b_addr = AW'(int'(ev.y) * BETA + int'(ev.x));
        b_wdata = {1'b1, ev.p, ev.t[TSB-1:0]};
      end else begin
        b_en   = inrange(ev, ib);
        b_addr = caddr(ev, ib);
      end
    end
  end

  // evaluation of one read word against the event being evaluated:
  // returns {edge valid, neighbour polarity, dt[1:0]}
  function automatic logic [3:0] eval(input logic [W-1:0] q, input logic inr,
                                      input int i, input nev_t e);
    logic [TSB-1:0] d;
    int dd;
    d  = e.t[TSB-1:0] - q[TSB-1:0];
    dd = r3_dx(i)*r3_dx(i) + r3_dy(i)*r3_dy(i) + int'(d)*int'(d);
    return {inr && q[W-1] && (dd <= 9), q[W-2], d[1:0]};
  endfunction

  eg_t acc_n;
  logic [3:0] ra, rb;
  int ea, eb;
  always_comb begin
    acc_n = acc;
    ea = int'(e_c);
    eb = int'(e_c) + CYC;
    ra = eval(a_q, e_inr_a, ea, e_ev);
    rb = eval(b_q, e_inr_b, eb, e_ev);
    if (e_act) begin
      acc_n.valid[ea] = ra[3]; acc_n.pol[ea] = ra[2]; acc_n.dt[ea] = ra[1:0];
      if (e_c != 4'(CYC-1)) begin
        acc_n.valid[eb] = rb[3]; acc_n.pol[eb] = rb[2]; acc_n.dt[eb] = rb[1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT; init_addr <= '0; c <= '0; ev <= '0;
      e_act <= 1'b0; e_last <= 1'b0; e_c <= '0; e_inr_a <= 1'b0; e_inr_b <= 1'b0;
      e_ev <= '0; acc <= '0;
      out_valid <= 1'b0; out_ev <= '0; out_edges <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (st == S_INIT) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == AW'(DEPTH-1)) st <= S_IDLE;
      end else if (adv) begin
        // read stage
        if (start_now) begin
          st <= S_RUN; c <= '0; ev <= in_ev;
        end else if (run_now) begin
          if (c == 4'(CYC-1)) st <= S_IDLE;
          else c <= c + 1'b1;
        end
        // evaluation stage
        e_act   <= run_now;
        e_last  <= run_now && (c == 4'(CYC-1));
        e_c     <= c;
        e_ev    <= ev;
        e_inr_a <= inrange(ev, int'(c));
        e_inr_b <= inrange(ev, int'(c) + CYC);
        if (e_act) begin
          if (e_last) begin
            out_valid <= 1'b1;
            out_ev    <= e_ev;
            out_edges <= acc_n;
            acc       <= '0;
          end else begin
            acc <= acc_n;
          end
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_ev));
endmodule
