// tb_xgb_stream_top: end-to-end test of the streaming inference engine at its
// full default size (100 trees, 512-bit streams, 16-word output FIFO, no
// parameter overrides). The testbench plays the DMA engine on both stream
// ports: it sends random feature words on the host-to-card port and takes
// results on the card-to-host port. Every result is compared, in order and
// with its tlast, with the reference tree walk of xgb_ref_pkg.
//
// Phases and what each must show:
//   1 latency:      one word, result 10 clocks after acceptance (9 engine
//                   stages and 1 FIFO stage)
//   2 streaming:    400 words back to back, one accepted per clock, all
//                   results out in 400 + 10 clocks counted from the first accepted word
//   3 backpressure: the host stops taking results; the FIFO fills to 16,
//                   the engine stalls and the input is refused, with no loss
//   4 model update: new thresholds and leaves written to 30 trees through
//                   the model write port; later words use the new model
//   5 random:       random input gaps and random output ready
// Each mechanism (stall, FIFO full, bubble, model write, tlast) is counted;
// one that never happened is a failure.
module tb_xgb_stream_top;
  import xgb_pkg::*;
  import xgb_ref_pkg::*;
  localparam int unsigned NT = NUM_TREES;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  logic [AXIS_W-1:0]     s_tdata, m_tdata;
  logic                  s_tvalid, s_tlast, s_tready;
  logic                  m_tvalid, m_tlast, m_tready;
  logic                  wr_en;
  logic [TREE_IDX_W-1:0] wr_tree;
  tree_params_t          wr_params;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  tree_params_t    pdyn [];
  logic [AXIS_W:0] expq [$];
  int n_out = 0, n_stall = 0, n_full = 0, n_bubble = 0, n_write = 0, n_last = 0;

  always #2 clk = ~clk;   // 250 MHz

  xgb_stream_top dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_h2c_tdata(s_tdata), .s_axis_h2c_tvalid(s_tvalid),
    .s_axis_h2c_tlast(s_tlast), .s_axis_h2c_tready(s_tready),
    .m_axis_c2h_tdata(m_tdata), .m_axis_c2h_tvalid(m_tvalid),
    .m_axis_c2h_tlast(m_tlast), .m_axis_c2h_tready(m_tready),
    .mdl_wr_en(wr_en), .mdl_wr_tree(wr_tree), .mdl_wr_params(wr_params),
    .fifo_count(fifo_count));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor and mechanism counters
  always @(posedge clk) begin
    if (rst_n) begin
      if (s_tvalid && !s_tready) n_stall++;
      if (int'(fifo_count) == FIFO_DEPTH) n_full++;
      if (m_tvalid && m_tready) begin
        checks++;
        if (expq.size() == 0) begin
          failures++; $display("FAIL unexpected result");
        end else begin
          if ({m_tlast, m_tdata} !== expq[0]) begin
            failures++;
            $display("FAIL result %0d: got %0d last %0b, expected %0d last %0b", n_out,
                     $signed(m_tdata[SUM_W-1:0]), m_tlast, $signed(expq[0][SUM_W-1:0]), expq[0][AXIS_W]);
          end
          void'(expq.pop_front());
        end
        if (m_tlast) n_last++;
        n_out++;
      end
    end
  end

  task automatic send(input logic [AXIS_W-1:0] w, input bit last);
    s_tvalid = 1'b1; s_tdata = w; s_tlast = last;
    #2;  // the output side changes its ready one unit after the clock edge
    while (!s_tready) begin @(posedge clk); #2; end
    expq.push_back({last, score_word(ref_score(w, pdyn, 1))});
    @(posedge clk); #1;
    s_tvalid = 1'b0;
  endtask

  task automatic drain();
    int guard = 0;
    m_tready = 1'b1;
    while (expq.size() != 0 && guard < 1000) begin @(posedge clk); #1; guard++; end
  endtask

  initial begin
    int cycles, t0, outs0;
    logic [AXIS_W-1:0] w;
    pdyn = new[NT];
    for (int t = 0; t < NT; t++) pdyn[t] = default_tree_params(1, t);
    s_tvalid = 1'b0; s_tdata = '0; s_tlast = 1'b0; m_tready = 1'b1;
    wr_en = 1'b0; wr_tree = '0; wr_params = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1: latency
    w = rand_word();
    s_tvalid = 1'b1; s_tdata = w; s_tlast = 1'b1;
    expq.push_back({1'b1, score_word(ref_score(w, pdyn, 1))});
    @(posedge clk); #1;
    s_tvalid = 1'b0;
    cycles = 1;
    while (!m_tvalid && cycles < 40) begin @(posedge clk); #1; cycles++; end
    checks++;
    if (cycles != 10) begin failures++; $display("FAIL latency %0d clocks, expected 10", cycles); end
    drain();

    // 2: back-to-back streaming, one inference per clock
    outs0 = n_out;
    t0 = 0;
    for (int i = 0; i < 400; i++) begin
      w = rand_word();
      s_tvalid = 1'b1; s_tdata = w; s_tlast = (i % 100 == 99);
      #1;
      checks++;
      if (!s_tready) begin failures++; $display("FAIL input refused while streaming"); end
      expq.push_back({s_tlast, score_word(ref_score(w, pdyn, 1))});
      @(posedge clk); #1;
      t0++;
    end
    s_tvalid = 1'b0;
    while (n_out - outs0 < 400 && t0 < 500) begin @(posedge clk); #1; t0++; end
    checks++;
    if (t0 != 400 + 10) begin failures++; $display("FAIL 400 inferences took %0d clocks, expected 410", t0); end

    // 3: backpressure: host stops reading for 60 clocks while words keep coming
    m_tready = 1'b0;
    fork
      begin
        for (int i = 0; i < 60; i++) send(rand_word(), i == 59);
      end
      begin
        repeat (60) @(posedge clk);
        #1;
        checks += 2;
        if (int'(fifo_count) != FIFO_DEPTH) begin failures++; $display("FAIL FIFO not full under backpressure"); end
        if (s_tready) begin failures++; $display("FAIL input not refused under backpressure"); end
        m_tready = 1'b1;
      end
    join
    drain();

    // 4: model update on 30 random trees, pipeline idle
    for (int k = 0; k < 30; k++) begin
      int t;
      t = $urandom_range(0, NT - 1);
      wr_en = 1'b1; wr_tree = TREE_IDX_W'(t);
      wr_params = {$urandom, $urandom, $urandom, $urandom, $urandom};
      pdyn[t] = wr_params;
      n_write++;
      @(posedge clk); #1;
    end
    wr_en = 1'b0;

    // 5: random gaps and random output ready
    fork
      begin
        for (int i = 0; i < 1500; i++) begin
          if ($urandom_range(0, 3) == 0) begin n_bubble++; @(posedge clk); #1; end
          else send(rand_word(), $urandom_range(0, 15) == 0);
        end
      end
      begin
        for (int c = 0; c < 3000; c++) begin
          m_tready = ($urandom_range(0, 3) != 0);
          @(posedge clk); #1;
        end
        m_tready = 1'b1;
      end
    join
    drain();
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end

    checks += 5;
    if (n_stall == 0)  begin failures++; $display("FAIL no stall happened"); end
    if (n_full == 0)   begin failures++; $display("FAIL FIFO never full"); end
    if (n_bubble == 0) begin failures++; $display("FAIL no bubble happened"); end
    if (n_write == 0)  begin failures++; $display("FAIL no model write happened"); end
    if (n_last == 0)   begin failures++; $display("FAIL no tlast passed"); end
    $display("results %0d, stall clocks %0d, FIFO-full clocks %0d, bubbles %0d, model writes %0d, tlast %0d",
             n_out, n_stall, n_full, n_bubble, n_write, n_last);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
