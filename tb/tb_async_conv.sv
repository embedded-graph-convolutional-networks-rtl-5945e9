// tb_async_conv -- first graph convolution against a behavioural model.
// Random weights, biases and quantisation constants go over the load bus;
// random events with random edge lists (including empty lists and full
// lists) are streamed in. Every output is compared with the model (self-loop
// plus valid edges, requantise, max, ReLU at the zero point); event and edge
// list must pass through unchanged. Throughput: with a free-running input
// and output, events are accepted every 15 clocks. A second phase stalls the
// output randomly.
module tb_async_conv;
  import efgcn_pkg::*;
  localparam int DIM = 16, NIN = 4, NEV = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wl_t wl;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, idle;
  nev_t in_ev, out_ev;
  eg_t in_edges, out_edges;
  logic [DIM-1:0][7:0] out_feat;
  int checks = 0, failures = 0;

  async_conv #(.DIM(DIM), .LAYER(3'd1)) dut (.*);

  int wgt [DIM][NIN];
  int bias [DIM];
  int qmult, qshift, qzp, posq;
  nev_t q_ev [$];
  eg_t  q_eg [$];

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  task automatic load(input int addr, input int data);
    @(negedge clk);
    wl.en = 1; wl.layer = 3'd1; wl.addr = 16'(addr); wl.data = 32'(data);
    @(negedge clk);
    wl.en = 0;
  endtask

  function automatic int sat(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  function automatic int rq(input longint acc);
    longint p;
    p = ((acc * qmult) >>> qshift) + qzp;
    return p > 127 ? 127 : (p < -128 ? -128 : int'(p));
  endfunction

  function automatic int model(input nev_t e, input eg_t g, input int o);
    int mx, acc, x [NIN];
    mx = -128;
    for (int v = 0; v <= NEIGH; v++) begin
      if (v == 0) begin
        x[0] = e.p ? 1 : -1; x[1] = 0; x[2] = 0; x[3] = 0;
      end else begin
        if (!g.valid[v-1]) continue;
        x[0] = g.pol[v-1] ? 1 : -1;
        x[1] = sat(r3_dx(v-1) * posq);
        x[2] = sat(r3_dy(v-1) * posq);
        x[3] = sat(-int'(g.dt[v-1]) * posq);
      end
      acc = bias[o];
      for (int i = 0; i < NIN; i++) acc += x[i] * wgt[o][i];
      if (rq(acc) > mx) mx = rq(acc);
    end
    return mx > qzp ? mx : qzp;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic stall_en = 0;
  int n_out = 0, n_in = 0;
  always @(negedge clk) out_ready = stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q_ev.push_back(in_ev); q_eg.push_back(in_edges); n_in++; end
    if (out_valid && out_ready) begin
      nev_t e; eg_t g;
      n_out++;
      if (q_ev.size() == 0) chk(0, "output without input");
      else begin
        e = q_ev.pop_front(); g = q_eg.pop_front();
        chk(out_ev == e && out_edges == g, "event and edges pass through");
        for (int o = 0; o < DIM; o++)
          chk(int'($signed(out_feat[o])) == model(e, g, o),
              $sformatf("feature o=%0d got %0d exp %0d", o, $signed(out_feat[o]), model(e, g, o)));
      end
    end
  end

  task automatic send(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = 1;
      in_ev = nev_t'({$urandom, $urandom});
      in_edges.valid = NEIGH'($urandom) & NEIGH'($urandom);
      case ($urandom_range(0, 7))
        0: in_edges.valid = '0;
        1: in_edges.valid = '1;
        default: ;
      endcase
      in_edges.pol = NEIGH'($urandom);
      in_edges.dt  = 58'({$urandom, $urandom});
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, t1;
    wl = '0; in_ev = '0; in_edges = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < DIM; o++) for (int i = 0; i < NIN; i++) begin
      wgt[o][i] = $urandom_range(0, 200) - 100;
      load(o*NIN + i, wgt[o][i]);
    end
    for (int o = 0; o < DIM; o++) begin
      bias[o] = $urandom_range(0, 4000) - 2000;
      load(DIM*NIN + o, bias[o]);
    end
    qmult = $urandom_range(50, 300); qshift = 9; qzp = $urandom_range(0, 20) - 10; posq = $urandom_range(1, 40);
    load(DIM*NIN + DIM + 0, qmult);
    load(DIM*NIN + DIM + 1, qshift);
    load(DIM*NIN + DIM + 2, qzp);
    load(DIM*NIN + DIM + 3, posq);
    t0 = int'($time / 10);
    send(NEV);
    t1 = int'($time / 10);
    chk(t1 - t0 >= 15 * (NEV - 1) && t1 - t0 <= 15 * (NEV - 1) + 4, $sformatf("%0d events took %0d clocks", NEV, t1 - t0));
    stall_en = 1;
    send(NEV);
    repeat (100) @(posedge clk);
    chk(n_out == 2 * NEV && n_in == 2 * NEV, "all events processed");
    chk(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
