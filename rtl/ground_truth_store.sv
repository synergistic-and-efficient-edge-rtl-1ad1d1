// ground_truth_store: one stored ground-truth trace per activity label, used by the
// memoisation (correlation) test. It holds N_ACT traces of WIN x N_CH cells of DATA_W
// bits (12 x 60 x 3 x 4 bytes by default), in the same layout as a window of the data buffer.
//
// The traces are written once through the write port (wr_en, wr_act, wr_idx, wr_ch,
// wr_data; one cell per clock) and read combinationally through the read port (rd_data
// follows rd_act/rd_idx/rd_ch in the same cycle). The paper states that the sensor stores
// one ground-truth trace for each activity. The number of activities, the write port used
// to load the traces and the register-array implementation are this design's own choices.
// The array has no reset; nothing may read a trace before it has been written.
module ground_truth_store
  import seeker_pkg::*;
#(
  parameter int unsigned P_N_ACT  = N_ACT,
  parameter int unsigned P_WIN    = WIN,
  parameter int unsigned P_N_CH   = N_CH,
  parameter int unsigned P_DATA_W = DATA_W
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(P_N_ACT)-1:0]    wr_act,
  input  logic [$clog2(P_WIN)-1:0]      wr_idx,
  input  logic [$clog2(P_N_CH)-1:0]     wr_ch,
  input  logic [P_DATA_W-1:0]           wr_data,
  input  logic [$clog2(P_N_ACT)-1:0]    rd_act,
  input  logic [$clog2(P_WIN)-1:0]      rd_idx,
  input  logic [$clog2(P_N_CH)-1:0]     rd_ch,
  output logic [P_DATA_W-1:0]           rd_data
);
  localparam int unsigned DEPTH = P_N_ACT * P_WIN * P_N_CH;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [P_DATA_W-1:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr(input logic [$clog2(P_N_ACT)-1:0] act,
                                         input logic [$clog2(P_WIN)-1:0]   idx,
                                         input logic [$clog2(P_N_CH)-1:0]  ch);
    return AW'((int'(act) * P_WIN + int'(idx)) * P_N_CH + int'(ch));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_act, wr_idx, wr_ch)] <= wr_data;
  end

  assign rd_data = mem[addr(rd_act, rd_idx, rd_ch)];

endmodule
