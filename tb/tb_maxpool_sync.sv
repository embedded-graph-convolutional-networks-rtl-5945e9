// tb_maxpool_sync -- 2x2x2 MaxPool of the synchronous part on an 8x8 map.
// The testbench plays the convolution (random vertex beats with random
// 17-bit edge lists, one end-of-channel beat per input channel) and the
// write bank of the feature memory (one clock read latency, random
// w_ready). A behavioural model merges the same vertices (max of features,
// OR of rescaled edges) into its own map; at every swap the bank written by
// the block must equal the model, after which both are cleared. Checks the
// swap count (one per KT input channels) and the merge counter.
module tb_maxpool_sync;
  import efgcn_pkg::*;
  localparam int SIZE_IN = 8, KS = 2, KT = 2, DIM = 4, SO = SIZE_IN / KS;
  localparam int DEPTH = SO * SO, AW = 4, W = DIM*8 + PNEIGH + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_vtx = 0, in_eoc = 0;
  logic [CRD_W-1:0] in_x = 0, in_y = 0;
  logic [PNEIGH-1:0] in_edges = 0;
  logic [DIM-1:0][7:0] in_feat = 0;
  logic fm_ready, fm_re, fm_we, fm_swap;
  logic [AW-1:0] fm_raddr, fm_waddr;
  logic [W-1:0] fm_q, fm_wdata;
  logic [31:0] merge_cnt, chan_cnt;
  int checks = 0, failures = 0;

  maxpool_sync #(.SIZE_IN(SIZE_IN), .KS(KS), .KT(KT), .DIM(DIM)) dut (.*);

  logic [W-1:0] bank [DEPTH], exp_m [DEPTH];
  int n_merge_exp = 0, n_swap = 0, sub = 0;

  always @(negedge clk) fm_ready = ($urandom_range(0, 4) != 0);
  always_ff @(posedge clk) begin
    if (fm_re) fm_q <= bank[fm_raddr];
    if (fm_we) bank[fm_waddr] <= fm_wdata;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic void model(input int x, input int y, input logic [PNEIGH-1:0] e,
                                input logic [DIM-1:0][7:0] f);
    int c, nx, ny, dx, dy, dt, k;
    logic [PNEIGH-1:0] ev;
    ev = '0;
    for (int i = 1; i <= PNEIGH; i++) if (e[i-1]) begin
      nx = x + p_dx(i); ny = y + p_dy(i);
      dx = (nx >>> 1) - (x >>> 1); dy = (ny >>> 1) - (y >>> 1);
      dt = (i >= 9 && sub == 0) ? -1 : 0;
      k = (dy + 1) * 3 + (dx + 1);
      if (dt == 0 && k != 4) ev[(k < 4 ? k + 1 : k) - 1] = 1'b1;
      if (dt != 0) ev[9 + k - 1] = 1'b1;
    end
    c = (y >> 1) * SO + (x >> 1);
    if (exp_m[c][W-1]) n_merge_exp++;
    exp_m[c][W-1] = 1'b1;
    exp_m[c][DIM*8 +: PNEIGH] |= ev;
    for (int o = 0; o < DIM; o++)
      if ($signed(f[o]) > $signed(exp_m[c][o*8 +: 8])) exp_m[c][o*8 +: 8] = f[o];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // at a swap: compare and clear
  always @(posedge clk) if (rst_n && fm_swap) begin
    n_swap++;
    #1;
    for (int c = 0; c < DEPTH; c++) begin
      if (exp_m[c][W-1]) chk(bank[c] == exp_m[c], $sformatf("cell %0d after swap %0d: %h exp %h", c, n_swap, bank[c], exp_m[c]));
      else chk(!bank[c][W-1], "empty cell stays empty");
      bank[c] = '0;
      exp_m[c] = {1'b0, PNEIGH'(0), {DIM{8'h80}}};
    end
  end

  task automatic beat(input logic vtx, input logic eoc);
    @(negedge clk);
    in_valid = 1; in_vtx = vtx; in_eoc = eoc;
    in_x = CRD_W'($urandom_range(0, SIZE_IN - 1));
    in_y = CRD_W'($urandom_range(0, SIZE_IN - 1));
    in_edges = PNEIGH'($urandom);
    in_feat = (DIM*8)'($urandom);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    if (vtx) model(int'(in_x), int'(in_y), in_edges, in_feat);
    if (eoc) sub = (sub + 1) % KT;
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    for (int c = 0; c < DEPTH; c++) begin bank[c] = '0; exp_m[c] = {1'b0, PNEIGH'(0), {DIM{8'h80}}}; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 12; ch++) begin
      repeat ($urandom_range(0, 40)) beat(1'b1, 1'b0);
      beat(1'b0, 1'b1);
    end
    repeat (5) @(posedge clk);
    chk(n_swap == 6 && chan_cnt == 6, $sformatf("swaps %0d", n_swap));
    chk(merge_cnt == 32'(n_merge_exp), $sformatf("merges %0d exp %0d", merge_cnt, n_merge_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
