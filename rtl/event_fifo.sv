// event_fifo -- block-RAM FIFO between the normaliser and the edge generator.
//
// Absorbs event bursts that arrive faster than the edge generator's one event
// per 15 clocks (13.3 M events/s at 200 MHz). The storage array is read
// synchronously into an output register, so the read side behaves as
// first-word-fall-through: rd_data is valid whenever empty is low and rd_en
// pops it. When the FIFO is full an incoming word is dropped and counted in
// overflow_cnt. Depth is this design's choice (the paper gives none).
module event_fifo #(
  parameter int W     = 49,
  parameter int DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic [31:0]  overflow_cnt,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;   // words held in mem (not in rd_data)
  logic          ovalid;
  logic          do_wr, do_rd_mem;

  assign full      = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty     = !ovalid;
  assign do_wr     = wr_en && !full;
  assign do_rd_mem = (!ovalid || rd_en) && (cnt != 0);
  assign level     = cnt;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
    if (do_rd_mem) rd_data <= mem[rp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; ovalid <= 1'b0; overflow_cnt <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd_mem) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (do_wr ? 1'b1 : 1'b0) - (do_rd_mem ? 1'b1 : 1'b0);
      if (do_rd_mem)  ovalid <= 1'b1;
      else if (rd_en) ovalid <= 1'b0;
      if (wr_en && full) overflow_cnt <= overflow_cnt + 1;
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> ovalid);
endmodule
