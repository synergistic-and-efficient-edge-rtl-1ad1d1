// decision_controller: the per-window decision flow of the node. For every complete
// window it picks one of the actions D0..D4, runs it, and has the outcome sent to the host.
//
// Flow, in the order of the paper's decision flow chart:
//  1a/1b  start the correlation engine. If the window matches a stored trace (D0), send
//         that activity label as the result and skip all other work.
//  2a/2b  otherwise, if the predicted energy covers the 16-bit DNN (E_D1), ask the DNN
//         crossbar for a 16-bit inference (D1). Otherwise, if it covers the 12-bit DNN
//         (E_D2), ask for a 12-bit inference (D2). The label returned is sent as the
//         result and also reported to the activity-aware selector (inf_valid/inf_act).
//  D3     otherwise, if the activity-aware selector offers a cluster count k > 0 (it
//         checks the energy for that k), build a clustering coreset of each channel in
//         turn and send each one.
//  D4     otherwise, if the predicted energy covers importance sampling (E_D4), build an
//         importance-sampling coreset of each channel in turn and send each one.
//  drop   otherwise the window is skipped.
// The predicted energy and k are sampled once, in the decision cycle after the
// correlation. decision_valid pulses with the decision when the window's work, packets
// included, is finished. A window that becomes ready while the controller is busy is not
// processed; win_missed then pulses.
//
// Interface: single-cycle start pulses to the engines (corr_start, dnn_req, km_start,
// is_start, pk_start) and single-cycle done pulses back. The DNN request carries dnn_sel
// (0: 16-bit, 1: 12-bit crossbar). ch selects the channel the coreset engines read.
// The order of the choices and the energies are the paper's. Preferring the 16-bit DNN
// when both fit, coding each channel separately, and ignoring windows that arrive while
// busy are this design's own choices. The paper draws this logic as part of the node's
// microcontroller; here it is a hardware state machine.
module decision_controller
  import seeker_pkg::*;
#(
  parameter int unsigned P_N_ACT = N_ACT,
  parameter int unsigned P_N_CH  = N_CH,
  parameter int unsigned P_E_D1  = E_D1,
  parameter int unsigned P_E_D2  = E_D2,
  parameter int unsigned P_E_D4  = E_D4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          win_ready,
  input  logic [E_W-1:0]                pred_energy,
  // correlation engine
  output logic                          corr_start,
  input  logic                          corr_done,
  input  logic                          corr_match,
  input  logic [$clog2(P_N_ACT)-1:0]    corr_act,
  // DNN crossbars (outside the node logic)
  output logic                          dnn_req,
  output logic                          dnn_sel,
  input  logic                          dnn_done,
  input  logic [$clog2(P_N_ACT)-1:0]    dnn_class,
  // activity-aware selector
  input  logic [K_W-1:0]                aac_k,
  output logic                          inf_valid,
  output logic [$clog2(P_N_ACT)-1:0]    inf_act,
  // coreset engines
  output logic [$clog2(P_N_CH)-1:0]     ch,
  output logic                          km_start,
  output logic [K_W-1:0]                km_k,
  input  logic                          km_done,
  output logic                          is_start,
  input  logic                          is_done,
  // payload packer
  output logic                          pk_start,
  output pkt_e                          pk_kind,
  output decision_e                     pk_decision,
  output logic [7:0]                    pk_label,
  input  logic                          pk_done,
  // status
  output logic                          busy,
  output logic                          decision_valid,
  output decision_e                     decision,
  output logic                          win_missed
);
  localparam int unsigned CW = $clog2(P_N_CH);

  typedef enum logic [3:0] {
    S_IDLE, S_CORR, S_DECIDE, S_DNN, S_SEND_RES, S_WAIT_RES,
    S_KM, S_KM_WAIT, S_IS, S_IS_WAIT, S_PK_WAIT, S_END
  } state_e;
  state_e state;

  decision_e dec;
  logic [7:0] label;

  assign busy        = (state != S_IDLE);
  assign pk_decision = dec;
  assign pk_label    = label;
  assign decision    = dec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      dec            <= D_DROP;
      label          <= '0;
      ch             <= '0;
      km_k           <= '0;
      dnn_sel        <= 1'b0;
      corr_start     <= 1'b0;
      dnn_req        <= 1'b0;
      km_start       <= 1'b0;
      is_start       <= 1'b0;
      pk_start       <= 1'b0;
      pk_kind        <= PK_RESULT;
      inf_valid      <= 1'b0;
      inf_act        <= '0;
      decision_valid <= 1'b0;
      win_missed     <= 1'b0;
    end else begin
      corr_start     <= 1'b0;
      dnn_req        <= 1'b0;
      km_start       <= 1'b0;
      is_start       <= 1'b0;
      pk_start       <= 1'b0;
      inf_valid      <= 1'b0;
      decision_valid <= 1'b0;
      win_missed     <= win_ready && (state != S_IDLE);
      unique case (state)
        S_IDLE: if (win_ready) begin
          corr_start <= 1'b1;
          state      <= S_CORR;
        end
        S_CORR: if (corr_done) begin
          if (corr_match) begin
            dec   <= D0_MEMO;
            label <= 8'(corr_act);
            state <= S_SEND_RES;
          end else begin
            state <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          ch <= '0;
          if (pred_energy >= E_W'(P_E_D1)) begin
            dec     <= D1_DNN16;
            dnn_sel <= 1'b0;
            dnn_req <= 1'b1;
            state   <= S_DNN;
          end else if (pred_energy >= E_W'(P_E_D2)) begin
            dec     <= D2_DNN12;
            dnn_sel <= 1'b1;
            dnn_req <= 1'b1;
            state   <= S_DNN;
          end else if (aac_k != 0) begin
            dec   <= D3_CLUST;
            km_k  <= aac_k;
            state <= S_KM;
          end else if (pred_energy >= E_W'(P_E_D4)) begin
            dec   <= D4_IMPS;
            state <= S_IS;
          end else begin
            dec   <= D_DROP;
            state <= S_END;
          end
        end
        S_DNN: if (dnn_done) begin
          label     <= 8'(dnn_class);
          inf_valid <= 1'b1;
          inf_act   <= dnn_class;
          state     <= S_SEND_RES;
        end
        S_SEND_RES: begin
          pk_kind  <= PK_RESULT;
          pk_start <= 1'b1;
          state    <= S_WAIT_RES;
        end
        S_WAIT_RES: if (pk_done) state <= S_END;
        S_KM: begin
          km_start <= 1'b1;
          state    <= S_KM_WAIT;
        end
        S_KM_WAIT: if (km_done) begin
          pk_kind  <= PK_CLUSTER;
          pk_start <= 1'b1;
          state    <= S_PK_WAIT;
        end
        S_IS: begin
          is_start <= 1'b1;
          state    <= S_IS_WAIT;
        end
        S_IS_WAIT: if (is_done) begin
          pk_kind  <= PK_IMPS;
          pk_start <= 1'b1;
          state    <= S_PK_WAIT;
        end
        S_PK_WAIT: if (pk_done) begin
          if (ch == CW'(P_N_CH - 1)) begin
            state <= S_END;
          end else begin
            ch    <= ch + 1'b1;
            state <= (dec == D3_CLUST) ? S_KM : S_IS;
          end
        end
        S_END: begin
          decision_valid <= 1'b1;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a request to an engine is only issued when the previous one has answered
  a_one_hot_start: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({corr_start, dnn_req, km_start, is_start, pk_start}));

endmodule
