// cluster_reco_top: on-line cluster reconstruction for a pad-readout GEM
// detector, from ADC samples to one record per cluster.
//
// Data path:
//   ADC samples (adc_clk) -> async_fifo -> hit_discriminator -> cluster_reco
//   -> sync_fifo (cluster records) -> readout (clk)
// The ADC side delivers one 12-bit sample per electrode, a frame of
// COLS x ROWS electrodes in raster order (bottom row first, each row from
// column 0). The dual-clock input FIFO lets the reconstruction run on its own,
// faster clock and absorbs the cycles it spends on merges and on the
// end-of-frame pass. The threshold turns each sample into a fired flag; the
// reconstruction groups 8-connected fired electrodes into clusters and, after
// the frame, writes for every cluster its sums (X*Q, Y*Q, Q, X, Y) and
// bounding box into the output FIFO. frame_done pulses once per frame, after
// the frame's last record has entered the output FIFO, with the number of
// clusters and an overflow flag (labels ran out, some electrodes dropped).
//
// adc_ready low means the input FIFO is full; a sample offered then is not
// taken. The readout takes records with out_valid/out_ready. threshold is
// read in the clk domain and should be changed only between frames.
// The chain of blocks follows the paper; the clocking, handshakes and sizes
// are this design's choices.
module cluster_reco_top
  import cluster_pkg::*;
#(
  parameter int unsigned COLS       = 167,
  parameter int unsigned ROWS       = 167,
  parameter int unsigned NLABELS    = 8192,
  parameter int unsigned IN_DEPTH   = 1024,
  parameter int unsigned OUT_DEPTH  = 64
) (
  // ADC side
  input  logic                    adc_clk,
  input  logic                    adc_rst_n,
  input  logic                    adc_valid,
  output logic                    adc_ready,
  input  sample_t                 adc_data,
  // reconstruction and readout side
  input  logic                    clk,
  input  logic                    rst_n,
  input  sample_t                 threshold,
  output logic                    out_valid,
  input  logic                    out_ready,
  output cluster_rec_t            out_rec,
  output logic [$clog2(OUT_DEPTH):0] out_level,  // records waiting
  output logic                    frame_done,
  output logic [$clog2(NLABELS):0] frame_clusters,
  output logic                    frame_overflow
);

  localparam int unsigned LW = $clog2(NLABELS);

  logic    s_valid, s_ready, s_hit;
  sample_t s_q;

  async_fifo #(.WIDTH(QW), .DEPTH(IN_DEPTH)) u_in_fifo (
    .wclk  (adc_clk),
    .wrst_n(adc_rst_n),
    .wvalid(adc_valid),
    .wready(adc_ready),
    .wdata (adc_data),
    .rclk  (clk),
    .rrst_n(rst_n),
    .rvalid(s_valid),
    .rready(s_ready),
    .rdata (s_q)
  );

  hit_discriminator u_thr (
    .sample   (s_q),
    .threshold(threshold),
    .hit      (s_hit)
  );

  logic         c_valid, c_ready;
  cluster_rec_t c_rec;

  cluster_reco #(.COLS(COLS), .ROWS(ROWS), .NLABELS(NLABELS), .LW(LW)) u_reco (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_valid      (s_valid),
    .in_ready      (s_ready),
    .in_q          (s_q),
    .in_hit        (s_hit),
    .out_valid     (c_valid),
    .out_ready     (c_ready),
    .out_rec       (c_rec),
    .frame_done    (frame_done),
    .frame_clusters(frame_clusters),
    .frame_overflow(frame_overflow)
  );

  logic [REC_W-1:0] o_data;

  sync_fifo #(.WIDTH(REC_W), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (c_valid),
    .in_ready (c_ready),
    .in_data  (c_rec),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (o_data),
    .level    (out_level)
  );

  assign out_rec = cluster_rec_t'(o_data);

endmodule
