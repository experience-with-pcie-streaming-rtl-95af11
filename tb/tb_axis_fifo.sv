// tb_axis_fifo: the 16-deep stream FIFO with 512-bit words. Random source
// valid and random sink ready; the source keeps a word stable until taken, as
// the stream rule requires. A testbench queue gives the expected order of
// words and tlast. Also checked: the FIFO refuses input exactly when 16 words
// are held, the count output, and that a word written into an empty FIFO can
// be read one clock later. The full and empty cases must each occur.
module tb_axis_fifo;
  localparam int W = 512;
  localparam int D = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  logic [$clog2(D+1)-1:0] count;
  logic [W:0] q [$];
  int n_full = 0, n_empty = 0, n_out = 0;

  always #5 clk = ~clk;

  axis_if #(.DATA_W(W)) s (.clk(clk), .rst_n(rst_n));
  axis_if #(.DATA_W(W)) m (.clk(clk), .rst_n(rst_n));

  axis_fifo #(.DATA_W(W), .DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .s_axis(s), .m_axis(m), .count(count));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rand_word();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    int p_in, p_out;
    bit rd, wr = 1'b0;
    logic [W:0] wword;
    s.tvalid = 1'b0; s.tdata = '0; s.tlast = 1'b0; m.tready = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // one word into an empty FIFO: readable one clock later
    s.tvalid = 1'b1; s.tdata = rand_word(); s.tlast = 1'b1;
    @(posedge clk); q.push_back({s.tlast, s.tdata}); #1;
    s.tvalid = 1'b0;
    checks++;
    if (!m.tvalid || {m.tlast, m.tdata} !== q[0]) begin
      failures++; $display("FAIL word not readable one clock after write");
    end
    for (int r = 0; r < 6000; r++) begin
      // phases: fill (sink slow), drain (source slow), mixed
      p_in  = (r % 1500 < 500) ? 90 : (r % 1500 < 1000) ? 10 : 50;
      p_out = (r % 1500 < 500) ? 10 : (r % 1500 < 1000) ? 90 : 50;
      if (!s.tvalid || wr) begin
        s.tvalid = ($urandom_range(1, 100) <= p_in);
        s.tdata  = rand_word();
        s.tlast  = ($urandom_range(0, 7) == 0);
      end
      m.tready = ($urandom_range(1, 100) <= p_out);
      #1;
      checks++;
      if (int'(count) != q.size() || s.tready != (q.size() < D) || m.tvalid != (q.size() > 0)) begin
        failures++;
        $display("FAIL count=%0d model=%0d tready=%0b tvalid=%0b", count, q.size(), s.tready, m.tvalid);
      end
      if (q.size() == D) n_full++;
      if (q.size() == 0) n_empty++;
      if (m.tvalid && m.tready) begin
        checks++;
        if (q.size() == 0 || {m.tlast, m.tdata} !== q[0]) begin
          failures++;
          $display("FAIL output word %0d differs", n_out);
        end
      end
      rd    = m.tvalid && m.tready;
      wr    = s.tvalid && s.tready;
      wword = {s.tlast, s.tdata};
      @(posedge clk);
      if (rd && q.size() > 0) begin void'(q.pop_front()); n_out++; end
      if (wr) q.push_back(wword);
      #1;
    end
    checks += 2;
    if (n_full == 0)  begin failures++; $display("FAIL FIFO never full"); end
    if (n_empty == 0) begin failures++; $display("FAIL FIFO never empty"); end
    $display("words out %0d, clocks full %0d, clocks empty %0d", n_out, n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
