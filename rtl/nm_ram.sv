// nm_ram -- the neighbourhood matrix: one cell per normalised pixel.
//
// A true two-port memory of DEPTH = BETA*BETA words. Each word holds the
// timestamp of the last event seen at that pixel (low log2(BETA) bits of t*),
// its polarity and a valid bit (the complement of the paper's is_empty flag):
// word = {valid, pol, ts}. Port A only reads; port B reads or writes. Reads
// are synchronous: the word addressed in one cycle appears on a_q / b_q in
// the next and is held while the port is not enabled. Clearing after reset
// is done by the edge generator through port B. The same memory serves as
// one bank of a feature memory (feature_mem), where DEPTH and W are set to
// the cell count and the vertex word width.
module nm_ram #(
  parameter int DEPTH = 16384,
  parameter int W     = 9
) (
  input  logic                     clk,
  input  logic                     a_en,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  output logic [W-1:0]             a_q,
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [W-1:0]             b_wdata,
  output logic [W-1:0]             b_q
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) a_q <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_q <= mem[b_addr];
    end
  end
endmodule
