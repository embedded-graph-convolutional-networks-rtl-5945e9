// tb_maxpool_async -- 4x4x4 MaxPool after the first convolution, on a 16x16
// graph (4x4 output map). Random events with edge lists and features are
// streamed in with slowly rising, occasionally jumping or falling (late)
// time stamps, while the elapsed-time input advances. The testbench plays
// the write bank of the feature memory (one clock read latency, random
// w_ready). A behavioural model pools the same events (max of features, OR
// of rescaled edges, internal edges dropped, late events dropped, a channel
// closed by a later event or by elapsed time); at every swap the bank must
// equal the model. Also checks the late, merge, dropped-edge and
// rescaled-edge counters.
module tb_maxpool_async;
  import efgcn_pkg::*;
  localparam int BETA = 16, K = 4, DIM = 4, SO = BETA / K, DEPTH = SO * SO, AW = 4;
  localparam int W = DIM*8 + PNEIGH + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready;
  nev_t in_ev;
  eg_t in_edges;
  logic [DIM-1:0][7:0] in_feat;
  logic [TS_W-1:0] time_done = 0;
  logic fm_ready, fm_re, fm_we, fm_swap;
  logic [AW-1:0] fm_raddr, fm_waddr;
  logic [W-1:0] fm_q, fm_wdata;
  logic [31:0] late_cnt, merge_cnt, drop_edge_cnt, resc_edge_cnt, chan_cnt;
  int checks = 0, failures = 0;

  maxpool_async #(.BETA(BETA), .K(K), .DIM(DIM)) dut (.*);

  logic [W-1:0] bank [DEPTH], exp_m [DEPTH];
  int cur = 0, n_late = 0, n_merge = 0, n_drop = 0, n_resc = 0, n_swap = 0;

  always @(negedge clk) fm_ready = ($urandom_range(0, 4) != 0);
  always_ff @(posedge clk) begin
    if (fm_re) fm_q <= bank[fm_raddr];
    if (fm_we) bank[fm_waddr] <= fm_wdata;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic void clear_model();
    for (int c = 0; c < DEPTH; c++) exp_m[c] = {1'b0, PNEIGH'(0), {DIM{8'h80}}};
  endfunction

  function automatic void model(input nev_t e, input eg_t g, input logic [DIM-1:0][7:0] f);
    int c, nx, ny, nt, dx, dy, dt, k;
    logic [PNEIGH-1:0] ev;
    ev = '0;
    for (int i = 0; i < NEIGH; i++) if (g.valid[i]) begin
      nx = int'(e.x) + r3_dx(i); ny = int'(e.y) + r3_dy(i); nt = int'(e.t) - int'(g.dt[i]);
      dx = (nx >>> 2) - (int'(e.x) >>> 2);
      dy = (ny >>> 2) - (int'(e.y) >>> 2);
      dt = (nt >>> 2) - (int'(e.t) >>> 2);
      k = (dy + 1) * 3 + (dx + 1);
      if (dt == 0 && k == 4) n_drop++;
      else begin
        n_resc++;
        ev[(dt == 0) ? ((k < 4 ? k + 1 : k) - 1) : (9 + k - 1)] = 1'b1;
      end
    end
    c = (int'(e.y) >> 2) * SO + (int'(e.x) >> 2);
    if (exp_m[c][W-1]) n_merge++;
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

  always @(posedge clk) if (rst_n && fm_swap) begin
    n_swap++;
    #1;
    for (int c = 0; c < DEPTH; c++) begin
      if (exp_m[c][W-1]) chk(bank[c] == exp_m[c], $sformatf("cell %0d swap %0d: %h exp %h", c, n_swap, bank[c], exp_m[c]));
      else chk(!bank[c][W-1], "empty cell stays empty");
      bank[c] = '0;
    end
    clear_model();
    cur++;
  end

  task automatic send(input int t);
    @(negedge clk);
    in_valid = 1;
    in_ev.t = TS_W'(t);
    in_ev.x = CRD_W'($urandom_range(0, BETA - 1));
    in_ev.y = CRD_W'($urandom_range(0, BETA - 1));
    in_ev.p = $urandom_range(0, 1);
    in_edges.valid = NEIGH'($urandom) & NEIGH'($urandom);
    in_edges.pol = NEIGH'($urandom);
    in_edges.dt = 58'({$urandom, $urandom});
    in_feat = (DIM*8)'($urandom);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    if ((t >> 2) < cur) n_late++;
    else model(in_ev, in_edges, in_feat);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t;
    in_ev = '0; in_edges = '0; in_feat = '0;
    for (int c = 0; c < DEPTH; c++) bank[c] = '0;
    clear_model();
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 0;
    for (int n = 0; n < 1500; n++) begin
      case ($urandom_range(0, 40))
        0: t = t + 9;                                    // jump over a channel
        1: if (t >= 6) send(t - 6);                      // late event
        2: time_done = TS_W'(t + 4);                     // time passes
        default: if ($urandom_range(0, 5) == 0) t = t + 1;
      endcase
      send(t);
    end
    repeat (20) @(posedge clk);
    chk(n_swap > 50 && 32'(n_swap) == chan_cnt, $sformatf("swaps %0d", n_swap));
    chk(late_cnt == 32'(n_late) && n_late > 0, $sformatf("late %0d exp %0d", late_cnt, n_late));
    chk(merge_cnt == 32'(n_merge), $sformatf("merges %0d exp %0d", merge_cnt, n_merge));
    chk(drop_edge_cnt == 32'(n_drop), $sformatf("dropped edges %0d exp %0d", drop_edge_cnt, n_drop));
    chk(resc_edge_cnt == 32'(n_resc), $sformatf("rescaled edges %0d exp %0d", resc_edge_cnt, n_resc));
    $display("swaps %0d late %0d merges %0d drops %0d rescaled %0d", n_swap, n_late, n_merge, n_drop, n_resc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
