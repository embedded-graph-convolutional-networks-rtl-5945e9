// efgcn_tb_body.svh -- shared body of the end-to-end testbenches of
// efgcn_top (reduced-size and full-size). The including module defines
// the localparams BETA, SENSOR_X, SENSOR_Y, TW_US, CLK_PER_US, DIM1..DIM5,
// M2..M5, NIN_P2..NIN_P5 (weight-row pitch of the load bus), RUN_CYCLES,
// and MIN_MAPS, instantiates the design as `dut` and supplies the watchdog.
//
// Stimulus: a blob of activity moving over the left half of the sensor (so
// that the right half of every output map stays empty) (events near its
// centre with the current microsecond time), occasional bursts of one event
// per clock to overflow the FIFO, and occasional events stamped well in the
// past, which must be dropped as late. Parameters: all weights zero, every
// bias a known positive value, scale 1, shift 0, zero point 0, so that every
// vertex of every layer must carry exactly the bias values of that layer.
//
// Checks: conv1/conv2 outputs and every output word of a non-empty cell
// equal the expected bias values; only left-half cells are non-empty; m_last once per map and maps = map
// counter; at least MIN_MAPS maps. Each mechanism is counted and a failure
// is counted for any that never happened: FIFO overflow, edges generated,
// late drops, merges in pooling 1, internal edges dropped and edges rescaled
// in pooling 1, bank swaps of memories 1..5, merges in poolings 2 and 3,
// non-empty and empty output cells.
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ev_valid = 0, ev_p = 0, wl_en = 0, m_valid, m_ready, m_last, m_cell_valid;
  logic [8:0] ev_x = 0, ev_y = 0;
  logic [TS_W-1:0] ev_t = 0, now_us;
  logic [2:0] wl_layer = 0;
  logic [15:0] wl_addr = 0;
  logic [31:0] wl_data = 0, m_data, stat_fifo_drops, stat_late_drops, stat_maps;
  int checks = 0, failures = 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic int bias_of(input int layer, input int o);
    return 3 + 5 * layer + (o % 7);
  endfunction

  task automatic load(input int layer, input int addr, input int data);
    @(negedge clk);
    wl_en = 1; wl_layer = 3'(layer); wl_addr = 16'(addr); wl_data = 32'(data);
    @(negedge clk);
    wl_en = 0;
  endtask

  task automatic load_layer(input int layer, input int dim, input int pitch);
    for (int a = 0; a < dim * pitch; a++) load(layer, a, 0);
    for (int o = 0; o < dim; o++) load(layer, dim * pitch + o, bias_of(layer, o));
    load(layer, dim * pitch + dim + 0, 1);
    load(layer, dim * pitch + dim + 1, 0);
    load(layer, dim * pitch + dim + 2, 0);
  endtask

  // ------------------------------------------------------------ monitors
  int n_edges = 0, n_sw [5], n_words = 0, n_last = 0, n_cell_full = 0, n_cell_empty = 0;
  int n_c1 = 0, n_c2 = 0;
  always @(negedge clk) m_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (dut.u_generate_graph.out_valid && dut.u_generate_graph.out_ready)
      n_edges += $countones(dut.u_generate_graph.out_edges.valid);
    if (dut.u_feature_mem1.r_start) n_sw[0]++;
    if (dut.u_feature_mem2.r_start) n_sw[1]++;
    if (dut.u_feature_mem3.r_start) n_sw[2]++;
    if (dut.u_feature_mem4.r_start) n_sw[3]++;
    if (dut.u_feature_mem5.r_start) n_sw[4]++;
    if (dut.u_async_conv1.out_valid && dut.u_async_conv1.out_ready) begin
      n_c1++;
      for (int o = 0; o < DIM1; o++)
        chk(int'(dut.u_async_conv1.out_feat[o]) == bias_of(1, o), "conv1 output = bias");
    end
    if (dut.u_sync_conv2.out_valid && dut.u_sync_conv2.out_ready && dut.u_sync_conv2.out_vtx) begin
      n_c2++;
      for (int o = 0; o < DIM2; o++)
        chk(int'(dut.u_sync_conv2.out_feat[o]) == bias_of(2, o), "conv2 output = bias");
    end
    if (m_valid && m_ready) begin
      int w;
      w = n_words % (DIM5 / 4);
      if (m_cell_valid) begin
        if (w == 0) n_cell_full++;
        for (int k = 0; k < 4; k++)
          chk(int'(m_data[k*8 +: 8]) == bias_of(5, 4*w + k), "output word = conv5 bias");
        chk((n_words / (DIM5 / 4)) % 4 < 2, "only cells of the stimulated left half are filled");
      end else begin
        if (w == 0) n_cell_empty++;
        chk(m_data == '0, "empty cell sends zeros");
      end
      n_words++;
      if (m_last) begin
        n_last++;
        chk(n_words == 16 * (DIM5 / 4), "words per map");
        n_words = 0;
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    int cx, cy, vx, vy, ex, ey;
    for (int i = 0; i < 5; i++) n_sw[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < DIM1; o++) load(1, DIM1 * 4 + o, bias_of(1, o));
    load(1, DIM1 * 4 + DIM1 + 0, 1);
    load_layer(2, DIM2, NIN_P2);
    load_layer(3, DIM3, NIN_P3);
    load_layer(4, DIM4, NIN_P4);
    load_layer(5, DIM5, NIN_P5);
    cx = SENSOR_X / 4; cy = SENSOR_Y / 2; vx = 1; vy = 1;
    for (int cyc = 0; cyc < RUN_CYCLES; cyc++) begin
      @(negedge clk);
      ev_valid = 0;
      if (cyc % 97 == 0) begin
        cx += vx; cy += vy;
        if (cx < 4 || cx > SENSOR_X / 2 - 5) vx = -vx;
        if (cy < 4 || cy > SENSOR_Y - 5) vy = -vy;
      end
      if ($urandom_range(0, 19) == 0 || (cyc % 50000) < 40) begin
        ev_valid = 1;
        ex = cx + int'($urandom_range(0, 8)) - 4;
        ey = cy + int'($urandom_range(0, 8)) - 4;
        ev_x = 9'((ex < 0) ? 0 : (ex > SENSOR_X / 2 - 1) ? SENSOR_X / 2 - 1 : ex);
        ev_y = 9'((ey < 0) ? 0 : (ey > SENSOR_Y - 1) ? SENSOR_Y - 1 : ey);
        ev_p = $urandom_range(0, 1);
        ev_t = now_us;
        if ($urandom_range(0, 499) == 0 && now_us > TS_W'(TW_US / 4)) ev_t = now_us - TS_W'(TW_US / 4);
      end
    end
    @(negedge clk); ev_valid = 0;
    for (int w = 0; w < RUN_CYCLES && n_last < MIN_MAPS; w++) @(posedge clk);
    repeat (100) @(posedge clk);
    $display("edges %0d fifo drops %0d late %0d merges1 %0d dropped-edges %0d rescaled %0d",
             n_edges, stat_fifo_drops, stat_late_drops, dut.u_maxpool1.merge_cnt,
             dut.u_maxpool1.drop_edge_cnt, dut.u_maxpool1.resc_edge_cnt);
    $display("swaps %0d %0d %0d %0d %0d merges2 %0d merges3 %0d maps %0d cells full %0d empty %0d conv1 %0d conv2 %0d",
             n_sw[0], n_sw[1], n_sw[2], n_sw[3], n_sw[4], dut.u_maxpool2.merge_cnt,
             dut.u_maxpool3.merge_cnt, n_last, n_cell_full, n_cell_empty, n_c1, n_c2);
    chk(stat_fifo_drops > 0, "mechanism: FIFO overflow");
    chk(n_edges > 0, "mechanism: edges generated");
    chk(stat_late_drops > 0, "mechanism: late events dropped");
    chk(dut.u_maxpool1.merge_cnt > 0, "mechanism: merges in pooling 1");
    chk(dut.u_maxpool1.drop_edge_cnt > 0, "mechanism: internal edges dropped");
    chk(dut.u_maxpool1.resc_edge_cnt > 0, "mechanism: edges rescaled");
    for (int i = 0; i < 5; i++) chk(n_sw[i] > 0, $sformatf("mechanism: bank swap of memory %0d", i + 1));
    chk(dut.u_maxpool2.merge_cnt > 0, "mechanism: merges in pooling 2");
    chk(dut.u_maxpool3.merge_cnt > 0, "mechanism: merges in pooling 3");
    chk(n_cell_full > 0, "mechanism: non-empty output cells");
    chk(n_cell_empty > 0, "mechanism: empty output cells");
    chk(n_c1 > 0 && n_c2 > 0, "conv1 and conv2 produced vertices");
    chk(n_last >= MIN_MAPS, $sformatf("maps %0d", n_last));
    chk(32'(n_last) == stat_maps, "map counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
