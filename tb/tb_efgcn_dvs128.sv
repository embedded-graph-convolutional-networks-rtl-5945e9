// tb_efgcn_dvs128 -- end-to-end test of efgcn_top for the 128x128 sensors of
// the CIFAR10-DVS and MNIST-DVS data sets. Everything is at its default
// size (EFGCN-B dims 16-32-32-64-64, 128x128 graph, 100 ms window, 200
// clocks per microsecond, 1024-entry FIFO) except the sensor resolution,
// which is raised from 120x100 to 128x128, so the normalisation maps pixels
// one to one onto graph coordinates. About 55 ms of simulated input give at
// least two 4x4 output maps. Stimulus and checks are in efgcn_tb_body.svh.
module tb_efgcn_dvs128;
  import efgcn_pkg::*;
  localparam int BETA = 128, SENSOR_X = 128, SENSOR_Y = 128, TW_US = 100000, CLK_PER_US = 200;
  localparam int DIM1 = 16, DIM2 = 32, DIM3 = 32, DIM4 = 64, DIM5 = 64;
  localparam int M2 = 1, M3 = 1, M4 = 1, M5 = 1;
  localparam int NIN_P2 = 32, NIN_P3 = 64, NIN_P4 = 64, NIN_P5 = 128;
  localparam int RUN_CYCLES = 11000000, MIN_MAPS = 2, WATCHDOG = 30000000;

  efgcn_top #(.SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y)) dut (.*);

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
