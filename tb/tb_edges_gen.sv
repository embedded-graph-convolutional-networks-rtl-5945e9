// tb_edges_gen -- edge generation on a 16x16 graph against a behavioural
// neighbourhood matrix. Random clustered events with slowly rising time
// stamps are streamed in; for each event the expected edge list (valid,
// polarity and dt of every cell within radius 3 that passes the
// dx^2+dy^2+dt^2 <= 9 test) is computed from the model, which is then updated
// with the event. Also checks the initial clear time, 15 clocks per event
// with a free-running output, that edges do occur, and correct results with
// a randomly stalled output.
module tb_edges_gen;
  import efgcn_pkg::*;
  localparam int BETA = 16, TSB = 4, NEV = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, idle;
  nev_t in_ev, out_ev;
  eg_t out_edges;
  int checks = 0, failures = 0;

  edges_gen #(.BETA(BETA)) dut (.*);

  logic [TSB+1:0] nm [BETA*BETA];
  eg_t  q_eg [$];
  nev_t q_ev [$];
  int n_edges = 0, n_out = 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  // expected edges of e; then record e
  function automatic eg_t model(input nev_t e);
    eg_t g;
    int nx, ny, d;
    logic [TSB+1:0] c;
    g = '0;
    for (int i = 0; i < NEIGH; i++) begin
      nx = int'(e.x) + r3_dx(i); ny = int'(e.y) + r3_dy(i);
      if (nx < 0 || ny < 0 || nx >= BETA || ny >= BETA) continue;
      c = nm[ny*BETA + nx];
      d = int'(4'(e.t[TSB-1:0] - c[TSB-1:0]));
      g.pol[i] = c[TSB];
      g.dt[i]  = 2'(d);
      g.valid[i] = c[TSB+1] && (r3_dx(i)**2 + r3_dy(i)**2 + d*d <= 9);
    end
    nm[int'(e.y)*BETA + int'(e.x)] = {1'b1, e.p, e.t[TSB-1:0]};
    return g;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic stall_en = 0;
  always @(negedge clk) out_ready = stall_en ? ($urandom_range(0, 3) == 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q_ev.push_back(in_ev); q_eg.push_back(model(in_ev)); end
    if (out_valid && out_ready) begin
      eg_t g; nev_t e;
      n_out++;
      e = q_ev.pop_front(); g = q_eg.pop_front();
      chk(out_ev == e, "event passes through");
      chk(out_edges.valid == g.valid, $sformatf("edge valid bits %h exp %h", out_edges.valid, g.valid));
      chk(((out_edges.pol ^ g.pol) & g.valid) == '0, "edge polarity");
      for (int i = 0; i < NEIGH; i++)
        if (g.valid[i]) chk(out_edges.dt[i] == g.dt[i], "edge dt");
      n_edges += $countones(g.valid);
    end
  end

  logic [TS_W-1:0] tnow = 0;
  task automatic send(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = 1;
      if ($urandom_range(0, 3) == 0) tnow = tnow + 1;
      in_ev.t = tnow;
      in_ev.x = CRD_W'($urandom_range(0, 7) + (($urandom_range(0, 9) == 0) ? 8 : 0));
      in_ev.y = CRD_W'($urandom_range(0, 5) + (($urandom_range(0, 9) == 0) ? 10 : 0));
      in_ev.p = $urandom_range(0, 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, t1;
    in_ev = '0;
    for (int i = 0; i < BETA*BETA; i++) nm[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = int'($time / 10);
    while (!in_ready) @(posedge clk);
    t1 = int'($time / 10);
    chk(t1 - t0 >= BETA*BETA && t1 - t0 <= BETA*BETA + 3, $sformatf("initial clear %0d clocks", t1 - t0));
    t0 = int'($time / 10);
    send(NEV);
    t1 = int'($time / 10);
    chk(t1 - t0 >= 15 * (NEV - 1) && t1 - t0 <= 15 * (NEV - 1) + 4, $sformatf("%0d events took %0d clocks", NEV, t1 - t0));
    stall_en = 1;
    send(NEV);
    stall_en = 0;
    repeat (100) @(posedge clk);
    chk(n_out == 2 * NEV, "all events out");
    chk(n_edges > NEV, $sformatf("edges were generated (%0d)", n_edges));
    chk(idle, "idle at the end");
    $display("edges generated: %0d", n_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
