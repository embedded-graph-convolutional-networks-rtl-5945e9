// tb_efgcn_top -- end-to-end test of the whole accelerator at reduced size:
// 64x64 graph from a 64x64 sensor, 64 ms window, 5 clocks per microsecond,
// 16-entry FIFO, feature dims 4-4-4-8-8 with two multipliers in conv4.
// The reduced sizes keep the same ratios as the full design (every temporal
// channel lasts longer than the convolutions need per channel) and give
// 16x16 -> 8x8 -> 4x4 maps, the last pooling being 2x2x2. Stimulus and
// checks are in efgcn_tb_body.svh.
module tb_efgcn_top;
  import efgcn_pkg::*;
  localparam int BETA = 64, SENSOR_X = 64, SENSOR_Y = 64, TW_US = 64000, CLK_PER_US = 5;
  localparam int DIM1 = 4, DIM2 = 4, DIM3 = 4, DIM4 = 8, DIM5 = 8;
  localparam int M2 = 1, M3 = 1, M4 = 2, M5 = 1;
  localparam int NIN_P2 = 8, NIN_P3 = 8, NIN_P4 = 8, NIN_P5 = 16;
  localparam int RUN_CYCLES = 800000, MIN_MAPS = 6, WATCHDOG = 3000000;

  efgcn_top #(.BETA(BETA), .SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y), .TIME_WINDOW_US(TW_US),
              .CLK_PER_US(CLK_PER_US), .FIFO_DEPTH(16),
              .DIM1(DIM1), .DIM2(DIM2), .DIM3(DIM3), .DIM4(DIM4), .DIM5(DIM5),
              .M2(M2), .M3(M3), .M4(M4), .M5(M5)) dut (.*);

`include "efgcn_tb_body.svh"

  // watchdog: a run that never reaches its end counts as a failure
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
