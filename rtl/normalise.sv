// normalise -- maps a raw sensor event onto the discrete event graph.
//
// Implements Eq. (2) of the EFGCN method: x* = floor(BETA*x/SENSOR_X),
// y* = floor(BETA*y/SENSOR_Y), t* = floor(BETA*t/TIME_WINDOW_US). The spatial
// coordinates land in 0..BETA-1 (inputs outside the sensor are clamped to
// BETA-1). The time coordinate is not wrapped: t* keeps counting, so t*/4 is
// directly the index of the temporal channel of the first pooling layer.
// The polarity is kept as one bit (1 = brightness increase).
//
// Interface: in_valid with in_x/in_y/in_t (microseconds)/in_p; out_valid and
// out_ev one clock later. There is no back-pressure: the FIFO behind this
// block absorbs bursts. Constant dividers are used; a synthesis tool maps
// them to constant multiplications.
module normalise
  import efgcn_pkg::*;
#(
  parameter int BETA           = 128,
  parameter int SENSOR_X       = 120,
  parameter int SENSOR_Y       = 100,
  parameter int TIME_WINDOW_US = 100000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [8:0]      in_x,
  input  logic [8:0]      in_y,
  input  logic [TS_W-1:0] in_t,
  input  logic            in_p,
  output logic            out_valid,
  output nev_t            out_ev
);

  function automatic logic [CRD_W-1:0] scale_xy(input logic [8:0] v, input int range);
    int s;
    s = (int'(v) * BETA) / range;
    if (s > BETA - 1) s = BETA - 1;
    return CRD_W'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ev.x <= scale_xy(in_x, SENSOR_X);
        out_ev.y <= scale_xy(in_y, SENSOR_Y);
        out_ev.t <= norm_time(in_t, BETA, TIME_WINDOW_US);
        out_ev.p <= in_p;
      end
    end
  end

endmodule
