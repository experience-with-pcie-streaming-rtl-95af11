// tb_batch_workload: the batch sizes of the paper's throughput table, run
// through the full-size engine (100 trees, 16-word FIFO, default model).
//
// Each batch is one host transfer: its words are sent back to back and the
// last word carries tlast. The host side takes every result at once. For a
// batch of B words the results must all be correct, in order, with tlast
// only on the last, and the batch must finish B + 10 clocks after its first
// word was accepted: one inference per clock plus the 10-clock pipeline.
// Batch sizes: 1, 10, 100, 1000, 10000 and 100000. At 250 MHz, B + 10 clocks
// for B = 100000 is 0.40 ms, i.e. about 250 million inferences per second
// inside the card.
module tb_batch_workload;
  import xgb_pkg::*;
  import xgb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  logic [AXIS_W-1:0]     s_tdata, m_tdata;
  logic                  s_tvalid, s_tlast, s_tready;
  logic                  m_tvalid, m_tlast, m_tready;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  tree_params_t    pdyn [];
  logic [AXIS_W:0] expq [$];
  int n_out = 0, n_last = 0;

  always #2 clk = ~clk;

  xgb_stream_top dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_h2c_tdata(s_tdata), .s_axis_h2c_tvalid(s_tvalid),
    .s_axis_h2c_tlast(s_tlast), .s_axis_h2c_tready(s_tready),
    .m_axis_c2h_tdata(m_tdata), .m_axis_c2h_tvalid(m_tvalid),
    .m_axis_c2h_tlast(m_tlast), .m_axis_c2h_tready(m_tready),
    .mdl_wr_en(1'b0), .mdl_wr_tree('0), .mdl_wr_params('0),
    .fifo_count(fifo_count));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready) begin
      checks++;
      if (expq.size() == 0 || {m_tlast, m_tdata} !== expq[0]) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d differs", n_out);
      end
      if (expq.size() != 0) void'(expq.pop_front());
      if (m_tlast) n_last++;
      n_out++;
    end
  end

  initial begin
    int sizes [6] = '{1, 10, 100, 1000, 10000, 100000};
    logic [AXIS_W-1:0] w;
    pdyn = new[NUM_TREES];
    for (int t = 0; t < NUM_TREES; t++) pdyn[t] = default_tree_params(1, t);
    s_tvalid = 1'b0; s_tdata = '0; s_tlast = 1'b0; m_tready = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (sizes[k]) begin
      int b, t0, outs0, lasts0;
      b = sizes[k];
      outs0 = n_out; lasts0 = n_last; t0 = 0;
      for (int i = 0; i < b; i++) begin
        w = rand_word();
        s_tvalid = 1'b1; s_tdata = w; s_tlast = (i == b - 1);
        #1;
        if (!s_tready) begin failures++; $display("FAIL input refused in batch %0d", b); end
        expq.push_back({s_tlast, score_word(ref_score(w, pdyn, 1))});
        @(posedge clk); #1;
        t0++;
      end
      s_tvalid = 1'b0; s_tlast = 1'b0;
      while (n_out - outs0 < b && t0 < b + 100) begin @(posedge clk); #1; t0++; end
      checks += 2;
      if (t0 != b + 10) begin failures++; $display("FAIL batch %0d took %0d clocks, expected %0d", b, t0, b + 10); end
      if (n_last - lasts0 != 1) begin failures++; $display("FAIL batch %0d: %0d tlast seen", b, n_last - lasts0); end
      $display("batch %0d: %0d clocks, %0.1f M inferences/s at 250 MHz", b, t0, 250.0 * b / t0);
      repeat (5) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
