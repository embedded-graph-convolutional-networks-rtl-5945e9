// out_serialise -- streams each finished output map to the processing system.
//
// The last feature memory holds, per quarter of the time window, a CELLS-cell
// map (4x4) of DIM int8 features. When that memory announces a map
// (fm_r_start) this block reads the cells in raster order (bank n-1 through
// reader port A) and sends each as DIM*8/OUT_W words, feature 0 in the low
// byte of the first word, with a valid/ready handshake. m_cell_valid tells
// whether the cell held any vertex (an empty cell is sent as zeros); m_last
// marks the final word of the map. fm_r_done then lets the memory clear the
// oldest bank.
//
// The paper names this block and places it after the last feature memory;
// word width, order and side-band signals are this design's choices.
module out_serialise
  import efgcn_pkg::*;
#(
  parameter int CELLS = 16,
  parameter int DIM   = 64,
  parameter int OUT_W = 32,
  localparam int AW = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int W = DIM * 8 + PNEIGH + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fm_r_start,
  output logic              fm_r_en,
  output logic [AW-1:0]     fm_r_addr,
  input  logic [W-1:0]      fm_r_q,
  output logic              fm_r_done,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [OUT_W-1:0]  m_data,
  output logic              m_last,
  output logic              m_cell_valid,
  output logic [31:0]       map_cnt
);
  localparam int NW = DIM * 8 / OUT_W;
  localparam int WW = (NW > 1) ? $clog2(NW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_SEND} st_t;
  st_t st;
  logic [AW-1:0] c;
  logic [WW-1:0] wi;

  assign fm_r_en   = (st == S_READ);
  assign fm_r_addr = c;
  assign m_valid   = (st == S_SEND);
  assign m_cell_valid = fm_r_q[W-1];
  assign m_data    = fm_r_q[W-1] ? fm_r_q[int'(wi)*OUT_W +: OUT_W] : '0;
  assign m_last    = (c == AW'(CELLS-1)) && (wi == WW'(NW-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; wi <= '0; fm_r_done <= 1'b0; map_cnt <= '0;
    end else begin
      fm_r_done <= 1'b0;
      unique case (st)
        S_IDLE: if (fm_r_start) begin st <= S_READ; c <= '0; wi <= '0; end
        S_READ: st <= S_SEND;
        S_SEND: if (m_ready) begin
          if (wi == WW'(NW-1)) begin
            wi <= '0;
            if (c == AW'(CELLS-1)) begin
              st <= S_IDLE; fm_r_done <= 1'b1; map_cnt <= map_cnt + 1;
            end else begin
              c <= c + 1'b1; st <= S_READ;
            end
          end else wi <= wi + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
