// tb_feature_mem -- walks the three-bank memory through several temporal
// channels. Each channel is written with random words, then swapped; the
// reader side must see that channel on port A (n-1) and the channel before
// it on port B (n-2). After the reader releases, the oldest bank must be
// cleared in exactly DEPTH cycles, and the writer must then find zeros in
// its new bank. Also checks w_ready/busy and the r_start pulse.
module tb_feature_mem;
  localparam int DEPTH = 16, W = 20, AW = 4, NCH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_ready, w_re = 0, w_we = 0, w_swap = 0, r_start, r_en = 0, r_done = 0, busy;
  logic [AW-1:0] w_raddr = 0, w_waddr = 0, r_addr_a = 0, r_addr_b = 0;
  logic [W-1:0] w_q, w_wdata = 0, r_qa, r_qb;
  logic [W-1:0] ref_m [NCH][DEPTH];
  int checks = 0, failures = 0;

  feature_mem #(.DEPTH(DEPTH), .W(W)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 0;
    while (!w_ready) begin @(posedge clk); n++; end
    chk(n >= DEPTH - 1 && n <= DEPTH + 2, "initial clear length");
    for (int ch = 0; ch < NCH; ch++) begin
      // new write bank must read zero everywhere
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); w_re = 1; w_raddr = AW'(a);
        @(negedge clk); w_re = 0;
        chk(w_q == '0, "write bank cleared");
      end
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        w_we = 1; w_waddr = AW'(a); w_wdata = W'($urandom); ref_m[ch][a] = w_wdata;
      end
      @(negedge clk); w_we = 0;
      // read-back on the writer port (read-modify-write path)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); w_re = 1; w_raddr = AW'(a);
        @(negedge clk); w_re = 0;
        chk(w_q == ref_m[ch][a], "writer read-back");
      end
      @(negedge clk); w_swap = 1;
      @(negedge clk); w_swap = 0;
      chk(r_start == 1'b1, "r_start pulse");
      chk(!w_ready && busy, "writer blocked while reading");
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); r_en = 1; r_addr_a = AW'(a); r_addr_b = AW'(DEPTH - 1 - a);
        @(negedge clk); r_en = 0;
        chk(r_qa == ref_m[ch][a], "port A holds channel n-1");
        if (ch > 0) chk(r_qb == ref_m[ch-1][DEPTH-1-a], "port B holds channel n-2");
        else        chk(r_qb == '0, "port B empty before two channels");
      end
      @(negedge clk); r_done = 1;
      @(negedge clk); r_done = 0;
      n = 0;
      while (!w_ready) begin @(negedge clk); n++; end
      chk(n >= DEPTH - 1 && n <= DEPTH + 1, "clear takes DEPTH cycles");
      // channel ch is still in bank ab (n-1 of the next swap is ch+1; ch becomes n-2)
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
