// tb_generate_graph -- normaliser + FIFO + edge generator on a 16x16 graph
// from a 32x32 sensor with a 1000 us window and an 8-entry FIFO. Events
// arrive in bursts (one per clock, far above the 15-clock edge rate, so the
// FIFO fills and drops) separated by quiet gaps. Checks: every output event
// is the normalised version of an input, in input order (a subsequence, as
// some are dropped); outputs + drops = inputs; drops happened; the edge list
// of every output matches a neighbourhood-matrix model fed with the outputs
// in order; idle is high only when nothing is left inside.
module tb_generate_graph;
  import efgcn_pkg::*;
  localparam int BETA = 16, SX = 32, SY = 32, TW = 1000, FD = 8, TSB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ev_valid = 0, ev_p = 0, out_valid, out_ready = 1, idle;
  logic [8:0] ev_x = 0, ev_y = 0;
  logic [TS_W-1:0] ev_t = 0;
  nev_t out_ev;
  eg_t out_edges;
  logic [31:0] fifo_drops;
  logic [$clog2(FD+1)-1:0] fifo_level;
  int checks = 0, failures = 0;

  generate_graph #(.BETA(BETA), .SENSOR_X(SX), .SENSOR_Y(SY), .TIME_WINDOW_US(TW),
                   .FIFO_DEPTH(FD)) dut (.*);

  logic [TSB+1:0] nm [BETA*BETA];
  nev_t q [$];
  int n_in = 0, n_out = 0, n_edges = 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

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
      g.pol[i] = c[TSB]; g.dt[i] = 2'(d);
      g.valid[i] = c[TSB+1] && (r3_dx(i)**2 + r3_dy(i)**2 + d*d <= 9);
    end
    nm[int'(e.y)*BETA + int'(e.x)] = {1'b1, e.p, e.t[TSB-1:0]};
    return g;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_valid) begin
      nev_t e;
      e.x = CRD_W'(BETA * ev_x / SX); e.y = CRD_W'(BETA * ev_y / SY);
      e.t = TS_W'(BETA * ev_t / TW); e.p = ev_p;
      q.push_back(e); n_in++;
    end
    if (out_valid && out_ready) begin
      eg_t g;
      logic found;
      n_out++;
      found = 0;
      while (q.size() > 0 && !found) begin
        if (q[0] == out_ev) found = 1;
        void'(q.pop_front());
      end
      chk(found, "output is a normalised input, in order");
      g = model(out_ev);
      chk(out_edges.valid == g.valid && ((out_edges.pol ^ g.pol) & g.valid) == '0, "edge list");
      n_edges += $countones(g.valid);
    end
    if (idle) chk(!out_valid && fifo_level == 0, "idle means empty");
  end

  initial begin
    for (int i = 0; i < BETA*BETA; i++) nm[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(posedge clk);
    for (int b = 0; b < 40; b++) begin
      repeat ($urandom_range(1, 30)) begin
        @(negedge clk);
        ev_valid = 1;
        ev_x = 9'($urandom_range(0, 15)); ev_y = 9'($urandom_range(0, 11));
        ev_p = $urandom_range(0, 1);
        ev_t = ev_t + $urandom_range(0, 20);
      end
      @(negedge clk); ev_valid = 0;
      repeat ($urandom_range(0, 400)) @(posedge clk);
    end
    repeat (600) @(posedge clk);
    chk(idle, "idle at the end");
    chk(n_out + int'(fifo_drops) == n_in, $sformatf("in %0d out %0d drops %0d", n_in, n_out, fifo_drops));
    chk(fifo_drops > 0, "bursts overflowed the FIFO");
    chk(n_edges > 0, "edges generated");
    $display("in %0d out %0d drops %0d edges %0d", n_in, n_out, fifo_drops, n_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
