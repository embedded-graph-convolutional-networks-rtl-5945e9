// tb_event_fifo -- random pushes and pops against a queue model; fills the
// FIFO to check 'full', the overflow counter and that no word is lost or
// reordered.
module tb_event_fifo;
  localparam int W = 49, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic full, empty;
  logic [31:0] overflow_cnt;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int drops = 0;

  event_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      // phase 1: mostly writes (forces full), phase 2: mostly reads
      wr_en   = ($urandom_range(0, 99) < ((n / 1000) % 2 == 0 ? 80 : 30));
      wr_data = {$urandom(), $urandom()};
      rd_en   = !empty && ($urandom_range(0, 99) < ((n / 1000) % 2 == 0 ? 30 : 80));
      if (rd_en) begin
        checks++;
        if (q.size() == 0 || rd_data != q[0]) begin
          failures++;
          if (failures < 5) $display("read mismatch at %0d", n);
        end
        void'(q.pop_front());
      end
      if (wr_en) begin
        if (full) drops++;
        else q.push_back(wr_data);
      end
      @(posedge clk);
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    checks++;
    if (overflow_cnt != 32'(drops) || drops == 0) begin
      failures++;
      $display("overflow count %0d expected %0d", overflow_cnt, drops);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
