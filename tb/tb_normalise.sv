// tb_normalise -- checks the graph normalisation against floor(beta*v/range)
// computed in the testbench, including clamping of out-of-sensor
// coordinates and the one-clock latency.
module tb_normalise;
  import efgcn_pkg::*;
  localparam int BETA = 128, SX = 120, SY = 100, TW = 100000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_p = 0;
  logic [8:0] in_x = 0, in_y = 0;
  logic [TS_W-1:0] in_t = 0;
  logic out_valid;
  nev_t out_ev;
  int checks = 0, failures = 0;

  normalise #(.BETA(BETA), .SENSOR_X(SX), .SENSOR_Y(SY), .TIME_WINDOW_US(TW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex, ey;
    longint et;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_x = 9'($urandom_range(0, (n % 10 == 0) ? 300 : SX - 1));
      in_y = 9'($urandom_range(0, (n % 10 == 0) ? 300 : SY - 1));
      in_t = $urandom();
      in_p = $urandom_range(0, 1);
      ex = (int'(in_x) * BETA) / SX; if (ex > BETA - 1) ex = BETA - 1;
      ey = (int'(in_y) * BETA) / SY; if (ey > BETA - 1) ey = BETA - 1;
      et = (longint'(in_t) * BETA) / TW;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_ev.x != 8'(ex) || out_ev.y != 8'(ey) ||
          out_ev.t != 32'(et) || out_ev.p != in_p) begin
        failures++;
        if (failures < 10)
          $display("mismatch x=%0d y=%0d t=%0d: got %0d %0d %0d exp %0d %0d %0d",
                   in_x, in_y, in_t, out_ev.x, out_ev.y, out_ev.t, ex, ey, et);
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
