// xgb_stream_top: gradient-boosted-tree inference engine for PCIe streaming.
//
// The top sits between the two stream ports of a PCIe DMA engine running in
// streaming mode. Host-to-card words arrive on s_axis_h2c_*: each 512-bit word
// is one inference request of 112 four-bit features. Each word is scored by
// the 100-tree ensemble in xgboost_core (one word per clock, nine clocks of
// latency) and the score goes through a 16-word stream FIFO to m_axis_c2h_*,
// the card-to-host port. The model's thresholds and leaf values sit in
// model_regs, loaded at reset with the built-in model and rewritable one tree
// per clock through the mdl_wr_* port.
//
// Timing: with m_axis_c2h_tready held high, a word accepted in clock n has
// its score presented in clock n + 10 (nine engine stages and one FIFO
// stage). When the host side stops taking results, the FIFO fills, then the
// engine stalls and s_axis_h2c_tready goes low; nothing is lost.
//
// The block arrangement (DMA master port -> engine -> FIFO -> DMA slave port,
// all 512 bits wide), the FIFO depth of 16 and all sizes follow the paper. The
// DMA engine and PCIe link are outside this module. The model write port,
// the tlast handling and the output word layout are this design's choices.
// Clock: one clock, 250 MHz in the paper's build. Reset: synchronous, active
// low.
module xgb_stream_top
  import xgb_pkg::*;
#(
  parameter int unsigned N_TREES    = NUM_TREES,
  parameter int unsigned MODEL_SEED = 1,
  parameter int unsigned FIFO_DEP   = FIFO_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host-to-card stream from the DMA engine's master port
  input  logic [AXIS_W-1:0]     s_axis_h2c_tdata,
  input  logic                  s_axis_h2c_tvalid,
  input  logic                  s_axis_h2c_tlast,
  output logic                  s_axis_h2c_tready,
  // card-to-host stream to the DMA engine's slave port
  output logic [AXIS_W-1:0]     m_axis_c2h_tdata,
  output logic                  m_axis_c2h_tvalid,
  output logic                  m_axis_c2h_tlast,
  input  logic                  m_axis_c2h_tready,
  // model parameter write port
  input  logic                  mdl_wr_en,
  input  logic [TREE_IDX_W-1:0] mdl_wr_tree,
  input  tree_params_t          mdl_wr_params,
  // output FIFO occupancy, for monitoring
  output logic [$clog2(FIFO_DEP+1)-1:0] fifo_count
);
  axis_if #(.DATA_W(AXIS_W)) h2c (.clk(clk), .rst_n(rst_n));
  axis_if #(.DATA_W(AXIS_W)) res (.clk(clk), .rst_n(rst_n));
  axis_if #(.DATA_W(AXIS_W)) c2h (.clk(clk), .rst_n(rst_n));

  assign h2c.tdata         = s_axis_h2c_tdata;
  assign h2c.tvalid        = s_axis_h2c_tvalid;
  assign h2c.tlast         = s_axis_h2c_tlast;
  assign s_axis_h2c_tready = h2c.tready;

  assign m_axis_c2h_tdata  = c2h.tdata;
  assign m_axis_c2h_tvalid = c2h.tvalid;
  assign m_axis_c2h_tlast  = c2h.tlast;
  assign c2h.tready        = m_axis_c2h_tready;

  tree_params_t [N_TREES-1:0] params;

  model_regs #(
    .N_TREES   (N_TREES),
    .MODEL_SEED(MODEL_SEED)
  ) u_model (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_en    (mdl_wr_en),
    .wr_tree  (mdl_wr_tree),
    .wr_params(mdl_wr_params),
    .params   (params)
  );

  xgboost_core #(
    .N_TREES   (N_TREES),
    .MODEL_SEED(MODEL_SEED)
  ) u_core (
    .clk   (clk),
    .rst_n (rst_n),
    .s_axis(h2c),
    .m_axis(res),
    .params(params)
  );

  axis_fifo #(
    .DATA_W(AXIS_W),
    .DEPTH (FIFO_DEP)
  ) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .s_axis(res),
    .m_axis(c2h),
    .count (fifo_count)
  );
endmodule
