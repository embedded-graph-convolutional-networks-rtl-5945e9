// feature_mem -- three-bank feature memory between two layers of the
// synchronous part (the "memory switching" scheme).
//
// Each bank holds one temporal channel: DEPTH cells addressed by y*SIZE+x,
// W bits each (features, pooled edge list, valid bit; the packing is up to
// the layers). At any time one bank (n) belongs to the writer -- a MaxPool
// doing read-modify-write, or a convolution writing its results -- and the
// other two hold channels n-1 and n-2 for the reader, a convolution that
// needs the current and the previous channel.
//
//  * w_swap (writer): channel n is complete. Banks rotate: n becomes n-1,
//    n-1 becomes n-2 and the old n-2 bank, already cleared, becomes the new
//    write bank. r_start pulses one clock later and the reader begins.
//  * r_done (reader): the reader has finished the channel. The oldest bank
//    (n-2) is then cleared, one cell per clock (DEPTH clocks).
//  * w_ready is high while the write bank may be used and a swap accepted:
//    low from a swap until the reader is done and the clear has finished,
//    and during the initial clear of all three banks after reset.
//
// Reads are synchronous on every port (data one clock after the address,
// held while the port is not enabled). Each bank has one read and one write
// port, as a simple dual-port block RAM (an nm_ram instance per bank).
//
// The three banks, the roles and the reset of the oldest bank follow the
// paper; the handshake signals and the clearing method are this design's.
module feature_mem #(
  parameter int DEPTH = 1024,
  parameter int W     = 146
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // writer side
  output logic                     w_ready,
  input  logic                     w_re,
  input  logic [$clog2(DEPTH)-1:0] w_raddr,
  output logic [W-1:0]             w_q,
  input  logic                     w_we,
  input  logic [$clog2(DEPTH)-1:0] w_waddr,
  input  logic [W-1:0]             w_wdata,
  input  logic                     w_swap,
  // reader side
  output logic                     r_start,
  input  logic                     r_en,
  input  logic [$clog2(DEPTH)-1:0] r_addr_a,
  input  logic [$clog2(DEPTH)-1:0] r_addr_b,
  output logic [W-1:0]             r_qa,      // channel n-1
  output logic [W-1:0]             r_qb,      // channel n-2
  input  logic                     r_done,
  output logic                     busy       // reader active or clearing
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [1:0]   wb, ab, bb;          // write bank, n-1 bank, n-2 bank
  logic         reading, clearing, init;
  logic [AW-1:0] clr_addr;

  assign ab = (wb == 2'd0) ? 2'd2 : wb - 2'd1;
  assign bb = (wb == 2'd2) ? 2'd0 : wb + 2'd1;
  assign w_ready = !reading && !clearing && !init;
  assign busy    = reading || clearing || init;

  // per-bank port control
  logic          b_re [3];
  logic [AW-1:0] b_ra [3];
  logic          b_we [3];
  logic [AW-1:0] b_wa [3];
  logic [W-1:0]  b_wd [3];
  logic [W-1:0]  b_q  [3];

  always_comb begin
    for (int b = 0; b < 3; b++) begin
      b_re[b] = 1'b0; b_ra[b] = '0; b_we[b] = 1'b0; b_wa[b] = '0; b_wd[b] = '0;
      if (2'(b) == wb) begin
        b_re[b] = w_re;  b_ra[b] = w_raddr;
        b_we[b] = w_we;  b_wa[b] = w_waddr;  b_wd[b] = w_wdata;
      end else if (2'(b) == ab) begin
        b_re[b] = r_en;  b_ra[b] = r_addr_a;
      end else begin
        b_re[b] = r_en;  b_ra[b] = r_addr_b;
        b_we[b] = clearing; b_wa[b] = clr_addr;
      end
      if (init) begin
        b_we[b] = 1'b1; b_wa[b] = clr_addr; b_wd[b] = '0;
      end
    end
  end

  // each bank is a two-port RAM: port A reads, port B only writes
  for (genvar b = 0; b < 3; b++) begin : g_bank
    nm_ram #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk,
      .a_en(b_re[b]), .a_addr(b_ra[b]), .a_q(b_q[b]),
      .b_en(b_we[b]), .b_we(1'b1), .b_addr(b_wa[b]), .b_wdata(b_wd[b]), .b_q());
  end

  // output muxes follow the bank roles at the time of the read
  logic [1:0] wb_d, ab_d, bb_d;
  always_ff @(posedge clk) begin
    if (w_re) wb_d <= wb;
    if (r_en) begin ab_d <= ab; bb_d <= bb; end
  end
  assign w_q  = b_q[wb_d];
  assign r_qa = b_q[ab_d];
  assign r_qb = b_q[bb_d];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 2'd0; reading <= 1'b0; clearing <= 1'b0; init <= 1'b1;
      clr_addr <= '0; r_start <= 1'b0;
    end else begin
      r_start <= 1'b0;
      if (init || clearing) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == AW'(DEPTH-1)) begin
          init <= 1'b0; clearing <= 1'b0; clr_addr <= '0;
        end
      end
      if (w_swap && w_ready) begin
        wb      <= bb;
        reading <= 1'b1;
        r_start <= 1'b1;
      end
      if (r_done && reading) begin
        reading  <= 1'b0;
        clearing <= 1'b1;
        clr_addr <= '0;
      end
    end
  end

  a_swap_ready: assert property (@(posedge clk) disable iff (!rst_n) w_swap |-> w_ready);
  a_write_ready: assert property (@(posedge clk) disable iff (!rst_n) w_we |-> w_ready);
endmodule
