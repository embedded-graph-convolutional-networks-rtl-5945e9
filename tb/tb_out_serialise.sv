// tb_out_serialise -- output streaming of a 4-cell map with 8 features in
// 32-bit words. The testbench plays the last feature memory (one clock read
// latency) with random cells, some empty, announces maps with r_start and
// accepts words with a random ready. Checks every word (value, cell-valid
// flag, last flag), the words per map, the r_done pulse and the map counter.
module tb_out_serialise;
  import efgcn_pkg::*;
  localparam int CELLS = 4, DIM = 8, OUT_W = 32, W = DIM*8 + PNEIGH + 1, NW = DIM*8/OUT_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fm_r_start = 0, fm_r_en, fm_r_done, m_valid, m_ready = 0, m_last, m_cell_valid;
  logic [1:0] fm_r_addr;
  logic [W-1:0] fm_r_q;
  logic [OUT_W-1:0] m_data;
  logic [31:0] map_cnt;
  int checks = 0, failures = 0;

  out_serialise #(.CELLS(CELLS), .DIM(DIM), .OUT_W(OUT_W)) dut (.*);

  logic [W-1:0] mem [CELLS];
  always_ff @(posedge clk) if (fm_r_en) fm_r_q <= mem[fm_r_addr];
  always @(negedge clk) m_ready = ($urandom_range(0, 2) != 0);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_word = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (fm_r_done) n_done++;
    if (m_valid && m_ready) begin
      int c, w;
      c = n_word / NW; w = n_word % NW;
      chk(m_cell_valid == mem[c][W-1], "cell valid flag");
      chk(m_data == (mem[c][W-1] ? mem[c][w*OUT_W +: OUT_W] : '0), "word value");
      chk(m_last == (n_word == CELLS*NW - 1), "last flag");
      n_word++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 20; m++) begin
      for (int c = 0; c < CELLS; c++) begin
        mem[c] = {1'b0, PNEIGH'($urandom), 32'($urandom), 32'($urandom)};
        mem[c][W-1] = ($urandom_range(0, 3) != 0);
      end
      n_word = 0; n_done = 0;
      @(negedge clk); fm_r_start = 1;
      @(negedge clk); fm_r_start = 0;
      while (n_done == 0) @(posedge clk);
      @(negedge clk);
      chk(n_word == CELLS*NW && n_done == 1, $sformatf("words per map %0d", n_word));
      chk(map_cnt == 32'(m + 1), "map counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
