// tb_nm_ram -- random reads on port A and reads/writes on port B against an
// array model; checks one-clock read latency and that data hold while a
// port is idle.
module tb_nm_ram;
  localparam int DEPTH = 256, W = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en = 0, b_en = 0, b_we = 0;
  logic [7:0] a_addr = 0, b_addr = 0;
  logic [W-1:0] a_q, b_q, b_wdata = 0;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  nm_ram #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ea, eb;
    logic ra, rb;
    // fill through port B
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_addr = 8'(i); b_wdata = W'($urandom); model[i] = b_wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1); a_addr = 8'($urandom);
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 3) == 0;
      b_addr = 8'($urandom); b_wdata = W'($urandom);
      if (b_we && a_addr == b_addr) a_addr = a_addr + 1;
      ra = a_en; rb = b_en && !b_we;
      ea = ra ? model[a_addr] : a_q;
      eb = rb ? model[b_addr] : b_q;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(posedge clk); #1;
      checks += 2;
      if (a_q != ea) failures++;
      if (b_q != eb) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
