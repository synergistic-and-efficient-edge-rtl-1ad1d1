// payload_packer: builds the packet the node hands to its low-power radio and sends it
// out one byte at a time over a valid/ready stream.
//
// Packet format (this design's own; the paper gives only the payload contents and sizes):
//   byte 0        {kind[1:0], decision[2:0], channel[1:0], 1'b0}
//   byte 1        RESULT: activity label; CLUSTER: k; IMPS: number of points n
//   RESULT        nothing more (2 bytes in all)
//   CLUSTER       k clusters of 28 bits packed MSB first, cluster 0 first: centre t (8),
//                 centre v (8), radius (8), count (4). That is ceil(3.5*k) bytes, 42 for
//                 k = 12, as in the paper.
//   IMPS          n points of (t, v), 2 bytes each (40 for n = 20)
//
// Interface: a start pulse, while the packer is idle, latches the packet fields (kind,
// decision, channel, label, k with clusters, or n with points). Bytes then leave on
// tx_valid/tx_data with tx_last on the final byte; a byte moves when tx_valid and
// tx_ready are both high. done pulses in the cycle after the last byte has moved.
// start is ignored while busy.
// Timing: one byte per clock while tx_ready is high; the first byte is valid in the
// cycle after start.
module payload_packer
  import seeker_pkg::*;
#(
  parameter int unsigned P_K_MAX = K_MAX,
  parameter int unsigned P_NPTS  = IS_POINTS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  pkt_e                          kind,
  input  decision_e                     decision,
  input  logic [1:0]                    channel,
  input  logic [7:0]                    label,
  input  logic [$clog2(P_K_MAX+1)-1:0]  k,
  input  cluster_t                      clusters [P_K_MAX],
  input  logic [$clog2(P_NPTS+1)-1:0]   n_pts,
  input  point_t                        points [P_NPTS],
  output logic                          busy,
  output logic                          tx_valid,
  output logic [7:0]                    tx_data,
  output logic                          tx_last,
  input  logic                          tx_ready,
  output logic                          done
);
  localparam int unsigned CL_BITS = 28;
  localparam int unsigned CL_BYTES = (P_K_MAX * CL_BITS + 7) / 8;
  localparam int unsigned PT_BYTES = 2 * P_NPTS;
  localparam int unsigned MAXB = 2 + ((CL_BYTES > PT_BYTES) ? CL_BYTES : PT_BYTES);
  localparam int unsigned BW   = $clog2(MAXB + 1);

  logic [MAXB*8-1:0] pkt;    // byte 0 at the top
  logic [BW-1:0]     len, pos;

  // packet image and length for the current inputs
  logic [MAXB*8-1:0] img;
  logic [BW-1:0]     img_len;
  always_comb begin
    logic [P_K_MAX*CL_BITS-1:0] cl_bits;
    img     = '0;
    img_len = '0;
    cl_bits = '0;
    for (int c = 0; c < P_K_MAX; c++)
      cl_bits[(P_K_MAX-1-c)*CL_BITS +: CL_BITS] =
        (c < int'(k)) ? {clusters[c].c.t, clusters[c].c.v, clusters[c].r, clusters[c].n} : '0;
    img[MAXB*8-1 -: 8] = {kind, decision, channel, 1'b0};
    unique case (kind)
      PK_CLUSTER: begin
        img[MAXB*8-9 -: 8] = 8'(k);
        img[MAXB*8-17 -: P_K_MAX*CL_BITS] = cl_bits;
        img_len = BW'(2 + (int'(k) * CL_BITS + 7) / 8);
      end
      PK_IMPS: begin
        img[MAXB*8-9 -: 8] = 8'(n_pts);
        for (int i = 0; i < P_NPTS; i++)
          if (i < int'(n_pts)) img[MAXB*8-17-16*i -: 16] = points[i];
        img_len = BW'(2 + 2 * int'(n_pts));
      end
      default: begin
        img[MAXB*8-9 -: 8] = label;
        img_len = BW'(2);
      end
    endcase
  end

  assign tx_data  = pkt[MAXB*8-1 -: 8];
  assign tx_last  = tx_valid && (pos == len - 1'b1);
  assign busy     = tx_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt      <= '0;
      len      <= '0;
      pos      <= '0;
      tx_valid <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!tx_valid) begin
        if (start) begin
          pkt      <= img;
          len      <= img_len;
          pos      <= '0;
          tx_valid <= 1'b1;
        end
      end else if (tx_ready) begin
        pkt <= pkt << 8;
        pos <= pos + 1'b1;
        if (tx_last) begin
          tx_valid <= 1'b0;
          done     <= 1'b1;
        end
      end
    end
  end

  // a byte offered on the stream stays unchanged until the radio takes it
  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
