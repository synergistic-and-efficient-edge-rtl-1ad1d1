// window_buffer: the sensor data buffer of the node, a WIN x N_CH array of DATA_W-bit
// cells (60 x 3 x 4 bytes by default) that holds the moving window over the sample stream.
//
// Samples of all channels arrive together (in_valid, in_data[ch]) and are written in
// circular order. A hop counter forms the moving window: once the buffer is full, a window
// is complete every HOP samples (30 by default, i.e. windows of 60 overlapping by 30), and
// win_ready pulses for one cycle in the cycle after the HOP-th write. The window then
// consists of the WIN most recent samples; rd_idx = 0 addresses the oldest and WIN-1 the
// newest. The read is combinational (rd_data is valid in the same cycle as rd_idx/rd_ch).
//
// The buffer size, 4-byte cells, the channel count and the 30-sample shift come from the
// paper. The circular write, the read port and the single-cycle ready pulse are this
// design's own. The cells hold two's-complement fixed-point samples rather than floating
// point. A reader must finish with a window before the next sample arrives (one sample
// period, 20 ms at 50 Hz), because that sample overwrites the window's oldest entry.
module window_buffer
  import seeker_pkg::*;
#(
  parameter int unsigned P_WIN    = WIN,
  parameter int unsigned P_N_CH   = N_CH,
  parameter int unsigned P_DATA_W = DATA_W,
  parameter int unsigned P_HOP    = HOP
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [P_N_CH-1:0][P_DATA_W-1:0]    in_data,
  output logic                               win_ready,
  input  logic [$clog2(P_WIN)-1:0]           rd_idx,
  input  logic [$clog2(P_N_CH)-1:0]          rd_ch,
  output logic [P_DATA_W-1:0]                rd_data
);
  localparam int unsigned AW = $clog2(P_WIN);
  localparam int unsigned HW = $clog2(P_HOP + 1);
  localparam int unsigned FW = $clog2(P_WIN + 1);

  logic [P_N_CH-1:0][P_DATA_W-1:0] mem [P_WIN];
  logic [AW-1:0] wptr;      // next cell to write == oldest sample once full
  logic [FW-1:0] fill;      // samples held, saturates at P_WIN
  logic [HW-1:0] hop_cnt;   // samples since the last window

  always_ff @(posedge clk) begin
    if (in_valid) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      fill      <= '0;
      hop_cnt   <= '0;
      win_ready <= 1'b0;
    end else begin
      win_ready <= 1'b0;
      if (in_valid) begin
        wptr <= (wptr == AW'(P_WIN - 1)) ? '0 : wptr + 1'b1;
        if (fill != FW'(P_WIN)) fill <= fill + 1'b1;
        if (fill == FW'(P_WIN - 1)) begin
          // first full window
          win_ready <= 1'b1;
          hop_cnt   <= '0;
        end else if (fill == FW'(P_WIN)) begin
          if (hop_cnt == HW'(P_HOP - 1)) begin
            win_ready <= 1'b1;
            hop_cnt   <= '0;
          end else begin
            hop_cnt <= hop_cnt + 1'b1;
          end
        end
      end
    end
  end

  // window index -> physical cell: oldest sample sits at wptr
  logic [AW:0] phys;
  always_comb begin
    phys = {1'b0, wptr} + {1'b0, rd_idx};
    if (phys >= (AW+1)'(P_WIN)) phys = phys - (AW+1)'(P_WIN);
  end
  assign rd_data = mem[phys[AW-1:0]][rd_ch];

endmodule
