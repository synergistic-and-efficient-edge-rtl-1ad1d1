// seeker_pkg: types and constants shared by the Seeker energy-harvesting sensor node.
//
// The node buffers a moving window of WIN samples from N_CH sensor channels and, per
// window, decides between five actions (D0..D4): report a memoised result, run the 16-bit
// or 12-bit DNN, send a clustering coreset, or send an importance-sampling coreset.
// Sizes that follow the paper: 60 x 3 window of 4-byte cells with a 30-sample hop, 12
// clusters by default, 20 importance samples, at most 4 k-means and 7 sampling
// iterations, a 4-bit point count per cluster, correlation threshold 0.95, and the
// per-decision energies of the paper's energy table (in nJ here). The number of
// activities (12, as in the MHEALTH data set), the 8-bit quantisation of coreset
// points and the fixed-point sample format are this design's own choices.
package seeker_pkg;

  // ---- window buffer -------------------------------------------------------------------
  localparam int unsigned WIN    = 60;  // samples per window
  localparam int unsigned HOP    = 30;  // window shift (overlap 30 of 60)
  localparam int unsigned N_CH   = 3;   // sensor channels
  localparam int unsigned DATA_W = 32;  // 4-byte cells
  localparam int unsigned IDX_W  = $clog2(WIN);
  localparam int unsigned CH_W   = $clog2(N_CH);

  // ---- activities / memoisation --------------------------------------------------------
  localparam int unsigned N_ACT  = 12;  // activity labels (ground-truth traces)
  localparam int unsigned ACT_W  = $clog2(N_ACT);
  // correlation threshold 0.95 in unsigned Q0.16: round(0.95 * 65536)
  localparam int unsigned CORR_TH_Q16 = 62259;

  // ---- coresets ------------------------------------------------------------------------
  localparam int unsigned K_MAX       = 12;  // default (and largest) number of clusters
  localparam int unsigned K_W         = $clog2(K_MAX + 1);
  localparam int unsigned KM_ITERS    = 4;   // clustering converges within 4 iterations
  localparam int unsigned IS_POINTS   = 20;  // importance-sampling coreset size
  localparam int unsigned IS_ITERS    = 7;   // importance sampling takes up to 7 iterations
  localparam int unsigned CNT_W       = 4;   // recovery parameter: points per cluster
  localparam int unsigned QSHIFT      = 8;   // sample -> 8-bit coreset value: (x >>> QSHIFT), saturated

  // one coreset point: time index and quantised value (2 bytes)
  typedef struct packed {
    logic [7:0]        t;
    logic signed [7:0] v;
  } point_t;

  // one recoverable cluster: centre (2 bytes), radius (1 byte), point count (4 bits) = 28 bits
  typedef struct packed {
    point_t            c;
    logic [7:0]        r;
    logic [CNT_W-1:0]  n;
  } cluster_t;

  // ---- decisions -----------------------------------------------------------------------
  typedef enum logic [2:0] {
    D0_MEMO   = 3'd0,  // correlation match: send last classification
    D1_DNN16  = 3'd1,  // 16-bit DNN at the sensor, send result
    D2_DNN12  = 3'd2,  // 12-bit DNN at the sensor, send result
    D3_CLUST  = 3'd3,  // clustering coreset (AAC) to the host
    D4_IMPS   = 3'd4,  // importance-sampling coreset to the host
    D_DROP    = 3'd7   // not enough energy for anything: window skipped
  } decision_e;

  // ---- energy (nJ) -------------------------------------------------------------------
  localparam int unsigned E_W = 32;
  // D0 (8.81 uJ) needs no test: the decision flow always runs the correlation first.
  localparam int unsigned E_D1 = 37500;  // 37.5 uJ
  localparam int unsigned E_D2 = 24850;  // 24.85 uJ
  localparam int unsigned E_D3 = 17040;  // 17.04 uJ (12 clusters)
  localparam int unsigned E_D4 = 16840;  // 16.84 uJ

  // AAC cluster-count options, tried from the default downwards
  localparam int unsigned N_KOPT = 4;
  localparam int unsigned KOPT_W = $clog2(N_KOPT);
  function automatic logic [K_W-1:0] kopt_k(input logic [KOPT_W-1:0] i);
    unique case (i)
      2'd0:    return K_W'(12);
      2'd1:    return K_W'(10);
      2'd2:    return K_W'(8);
      default: return K_W'(6);
    endcase
  endfunction

  // quantise a sample to a signed 8-bit coreset value
  function automatic logic signed [7:0] quant8(input logic signed [DATA_W-1:0] x);
    logic signed [DATA_W-1:0] s;
    s = x >>> QSHIFT;
    if (s > 127)       return 8'sd127;
    else if (s < -128) return -8'sd128;
    else               return s[7:0];
  endfunction

  // radio payload byte stream
  typedef enum logic [1:0] {PK_RESULT = 2'd0, PK_CLUSTER = 2'd1, PK_IMPS = 2'd2} pkt_e;

endpackage
