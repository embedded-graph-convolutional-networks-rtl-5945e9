// tb_sync_conv -- small synchronous graph convolution (4x4 map, 4 input
// features, 4 outputs, 2 multipliers per lane) against a behavioural model.
// Random weights, biases and quantisation constants are loaded over the load
// bus; the testbench plays the feature memory (banks n-1 and n-2 with one
// clock read latency) filled with random vertices and edge lists. Checks
// every output vertex (position, edges, features), the end-of-channel beat
// and fm_r_done, and that an unstalled channel takes SIZE*SIZE*9*DIM/M
// clocks. The output is randomly stalled in the later channels.
module tb_sync_conv;
  import efgcn_pkg::*;
  localparam int SIZE = 4, N_IN = 4, DIM = 4, M = 2, CELLS = SIZE*SIZE, AW = 4;
  localparam int NIN = N_IN + 3, NINP = 8, WI = N_IN*8 + PNEIGH + 1, K = DIM / M;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wl_t wl;
  logic fm_r_start = 0, fm_r_en, fm_r_done, out_valid, out_ready = 1, out_vtx, out_eoc, busy;
  logic [AW-1:0] fm_r_addr_a, fm_r_addr_b;
  logic [WI-1:0] fm_r_qa, fm_r_qb;
  logic [CRD_W-1:0] out_x, out_y;
  logic [PNEIGH-1:0] out_edges;
  logic [DIM-1:0][7:0] out_feat;
  int checks = 0, failures = 0;

  sync_conv #(.SIZE(SIZE), .N_IN(N_IN), .DIM(DIM), .M(M), .LAYER(3'd2)) dut (.*);

  logic [WI-1:0] bank_a [CELLS], bank_b [CELLS];
  always_ff @(posedge clk)
    if (fm_r_en) begin fm_r_qa <= bank_a[fm_r_addr_a]; fm_r_qb <= bank_b[fm_r_addr_b]; end

  int wgt [DIM][NIN];
  int bias [DIM];
  int qmult, qshift, qzp, posq;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  task automatic load(input int addr, input int data);
    @(negedge clk);
    wl.en = 1; wl.layer = 3'd2; wl.addr = 16'(addr); wl.data = 32'(data);
    @(negedge clk);
    wl.en = 0;
  endtask

  function automatic int rq(input longint acc);
    longint p;
    p = (acc * qmult) >>> qshift;
    p = p + qzp;
    if (p > 127) return 127;
    if (p < -128) return -128;
    return int'(p);
  endfunction

  function automatic int sx(input logic [WI-1:0] wd, input int i);
    return int'($signed(wd[i*8 +: 8]));
  endfunction

  // expected features of cell c, output o
  function automatic int model(input int c, input int o);
    int x, y, nx, ny, mx, acc, pq, idx;
    logic [PNEIGH-1:0] e;
    logic [WI-1:0] nb;
    logic ok;
    x = c % SIZE; y = c / SIZE;
    e = bank_a[c][N_IN*8 +: PNEIGH];
    mx = -128;
    for (int s = 0; s < 9; s++) begin
      for (int lane = 0; lane < 2; lane++) begin
        idx = s + 9*lane;
        nx = x + p_dx(idx); ny = y + p_dy(idx);
        ok = nx >= 0 && nx < SIZE && ny >= 0 && ny < SIZE;
        if (ok) nb = lane ? bank_b[ny*SIZE+nx] : bank_a[ny*SIZE+nx];
        else    nb = '0;
        if (idx != 0) ok = ok && e[idx-1];
        ok = ok && nb[WI-1];
        if (ok) begin
          acc = bias[o];
          for (int i = 0; i < N_IN; i++) acc += sx(nb, i) * wgt[o][i];
          pq = posq;
          acc += sat(p_dx(idx) * pq) * wgt[o][N_IN];
          acc += sat(p_dy(idx) * pq) * wgt[o][N_IN+1];
          acc += sat(p_dt(idx) * pq) * wgt[o][N_IN+2];
          if (rq(acc) > mx) mx = rq(acc);
        end
      end
    end
    return (mx > qzp) ? mx : qzp;
  endfunction

  function automatic int sat(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_vtx_exp, n_vtx, n_eoc, n_done;
  logic stall_en = 0;
  always @(negedge clk) out_ready = stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (fm_r_done) n_done++;
    if (out_valid && out_ready) begin
      if (out_eoc) begin
        n_eoc++;
        chk(!out_vtx, "eoc beat carries no vertex");
      end else begin
        int c;
        n_vtx++;
        c = int'(out_y) * SIZE + int'(out_x);
        chk(out_vtx && bank_a[c][WI-1], "vertex exists");
        chk(out_edges == bank_a[c][N_IN*8 +: PNEIGH], "edges passed through");
        for (int o = 0; o < DIM; o++)
          chk(int'($signed(out_feat[o])) == model(c, o), $sformatf("feature c=%0d o=%0d got %0d exp %0d",
              c, o, $signed(out_feat[o]), model(c, o)));
      end
    end
  end

  initial begin
    int t0, t1;
    wl = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < DIM; o++) for (int i = 0; i < NIN; i++) begin
      wgt[o][i] = $urandom_range(0, 60) - 30;
      load(o*NINP + i, wgt[o][i]);
    end
    for (int o = 0; o < DIM; o++) begin
      bias[o] = $urandom_range(0, 2000) - 1000;
      load(DIM*NINP + o, bias[o]);
    end
    qmult = $urandom_range(100, 600); qshift = 12; qzp = $urandom_range(0, 10) - 5; posq = $urandom_range(1, 60);
    load(DIM*NINP + DIM + 0, qmult);
    load(DIM*NINP + DIM + 1, qshift);
    load(DIM*NINP + DIM + 2, qzp);
    load(DIM*NINP + DIM + 3, posq);
    for (int ch = 0; ch < 6; ch++) begin
      n_vtx_exp = 0; n_vtx = 0; n_eoc = 0; n_done = 0;
      for (int c = 0; c < CELLS; c++) begin
        bank_a[c] = {1'b0, PNEIGH'($urandom), 32'($urandom)};
        bank_b[c] = {1'b0, PNEIGH'($urandom), 32'($urandom)};
        bank_a[c][WI-1] = ($urandom_range(0, 2) != 0);
        bank_b[c][WI-1] = ($urandom_range(0, 1) != 0);
        if (ch == 0) bank_a[c][WI-1] = 1'b1;
        if (bank_a[c][WI-1]) n_vtx_exp++;
      end
      stall_en = (ch >= 2);
      @(negedge clk); fm_r_start = 1;
      @(negedge clk); fm_r_start = 0;
      t0 = int'($time / 10);
      while (!fm_r_done) @(posedge clk);
      t1 = int'($time / 10);
      if (!stall_en) chk(t1 - t0 >= CELLS*9*K && t1 - t0 <= CELLS*9*K + 6,
                         $sformatf("channel length %0d", t1 - t0));
      repeat (5) @(posedge clk);
      chk(n_vtx == n_vtx_exp, $sformatf("vertex count %0d exp %0d", n_vtx, n_vtx_exp));
      chk(n_eoc == 1 && n_done == 1, "one eoc and one done per channel");
      chk(!busy, "idle after channel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
