// tb_xgboost_core: the inference engine with all 100 trees and the built-in
// model, fed random input words. Each output must equal the score computed by
// the reference tree walk (xgb_ref_pkg), in input order, with tlast on the
// same words as at the input.
//
// Phase 1: one word into an empty engine, output ready: the score must come
// out 9 clocks after the input was accepted. Phase 2: 300 words back to back
// with the output always ready: the engine must accept a word every clock and
// finish in 300 + 9 clocks, counted from the first accepted word to the last
// taken result (one inference per clock). Phase 3: random input
// gaps (bubbles) and random output ready (stalls); the input must be refused
// exactly while the output holds a result that is not taken.
module tb_xgboost_core;
  import xgb_pkg::*;
  import xgb_ref_pkg::*;
  localparam int unsigned NT   = NUM_TREES;
  localparam int unsigned SEED = 1;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  tree_params_t [NT-1:0] params;
  tree_params_t          pdyn [];
  logic [AXIS_W:0]       expq [$];
  int n_out = 0, n_stall = 0, n_bubble = 0;

  always #5 clk = ~clk;

  axis_if #(.DATA_W(AXIS_W)) s (.clk(clk), .rst_n(rst_n));
  axis_if #(.DATA_W(AXIS_W)) m (.clk(clk), .rst_n(rst_n));

  xgboost_core #(.N_TREES(NT), .MODEL_SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .s_axis(s), .m_axis(m), .params(params));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor: compare every taken result with the expected queue
  always @(posedge clk) begin
    if (rst_n && m.tvalid && m.tready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        if ({m.tlast, m.tdata} !== expq[0]) begin
          failures++;
          $display("FAIL output %0d: got %0d last %0b, expected %0d last %0b", n_out,
                   $signed(m.tdata[SUM_W-1:0]), m.tlast, $signed(expq[0][SUM_W-1:0]), expq[0][AXIS_W]);
        end
        void'(expq.pop_front());
      end
      n_out++;
    end
  end

  task automatic send_accept(input logic [AXIS_W-1:0] w, input bit last);
    // present w until accepted; record its expected result
    s.tvalid = 1'b1; s.tdata = w; s.tlast = last;
    #2;  // the output side changes its ready one unit after the clock edge
    while (!s.tready) begin @(posedge clk); #2; end
    expq.push_back({last, score_word(ref_score(w, pdyn, SEED))});
    @(posedge clk); #1;
    s.tvalid = 1'b0;
  endtask

  initial begin
    int t0, cycles, outs0;
    logic [AXIS_W-1:0] w;
    pdyn = new[NT];
    for (int t = 0; t < NT; t++) begin
      params[t] = default_tree_params(SEED, t);
      pdyn[t]   = params[t];
    end
    s.tvalid = 1'b0; s.tdata = '0; s.tlast = 1'b0; m.tready = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Phase 1: latency
    w = rand_word();
    s.tvalid = 1'b1; s.tdata = w; s.tlast = 1'b1;
    expq.push_back({1'b1, score_word(ref_score(w, pdyn, SEED))});
    @(posedge clk); #1;
    s.tvalid = 1'b0;
    cycles = 1;
    while (!m.tvalid && cycles < 40) begin @(posedge clk); #1; cycles++; end
    checks++;
    if (cycles != 9) begin failures++; $display("FAIL latency %0d clocks, expected 9", cycles); end
    @(posedge clk); #1;

    // Phase 2: back to back, one per clock
    outs0 = n_out;
    t0 = 0;
    for (int i = 0; i < 300; i++) begin
      w = rand_word();
      s.tvalid = 1'b1; s.tdata = w; s.tlast = (i % 50 == 49);
      #1;
      checks++;
      if (!s.tready) begin failures++; $display("FAIL input refused with output ready"); end
      expq.push_back({s.tlast, score_word(ref_score(w, pdyn, SEED))});
      @(posedge clk); #1;
      t0++;
    end
    s.tvalid = 1'b0;
    while (n_out - outs0 < 300 && t0 < 400) begin @(posedge clk); #1; t0++; end
    checks++;
    if (t0 != 300 + 9) begin failures++; $display("FAIL 300 inferences took %0d clocks, expected 309", t0); end

    // Phase 3: bubbles and stalls
    fork
      begin
        for (int i = 0; i < 1500; i++) begin
          if ($urandom_range(0, 3) == 0) begin
            n_bubble++;
            @(posedge clk); #1;
          end else begin
            send_accept(rand_word(), $urandom_range(0, 9) == 0);
          end
        end
      end
      begin
        for (int c = 0; c < 4000; c++) begin
          m.tready = ($urandom_range(0, 2) != 0);
          #1;
          if (m.tvalid && !m.tready) n_stall++;
          checks++;
          if (s.tready != (!m.tvalid || m.tready)) begin
            failures++; $display("FAIL tready rule");
          end
          @(posedge clk); #1;
        end
        m.tready = 1'b1;
      end
    join
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    checks += 2;
    if (n_stall == 0)  begin failures++; $display("FAIL no stall happened"); end
    if (n_bubble == 0) begin failures++; $display("FAIL no bubble happened"); end
    $display("outputs %0d, stall clocks %0d, bubbles %0d", n_out, n_stall, n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
