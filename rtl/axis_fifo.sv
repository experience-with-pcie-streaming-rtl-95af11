// axis_fifo: AXI4-Stream FIFO that buffers scores on their way from the
// inference engine back to the DMA engine.
//
// DEPTH words of DATA_W bits plus tlast are kept in a circular buffer with
// read and write pointers and an occupancy count. s_axis.tready is high while
// the FIFO is not full; m_axis.tvalid is high while it is not empty, and
// m_axis.tdata shows the oldest word. A word written in one clock can be read
// in the next (one clock of latency). A read and a write may happen in the
// same clock; a full FIFO refuses a write even in a clock where it is read.
// The paper names the FIFO and sets
// its depth to 16; the structure is this design's choice. Reset is
// synchronous and active low and empties the FIFO.
module axis_fifo #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned DEPTH  = 16
) (
  input  logic clk,
  input  logic rst_n,
  axis_if.snk  s_axis,
  axis_if.src  m_axis,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W:0]    mem [DEPTH];
  logic [PTR_W-1:0]   wr_ptr, rd_ptr;
  logic               do_wr, do_rd;

  assign s_axis.tready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign m_axis.tvalid = (count != '0);
  assign do_wr = s_axis.tvalid && s_axis.tready;
  assign do_rd = m_axis.tvalid && m_axis.tready;
  assign {m_axis.tlast, m_axis.tdata} = mem[rd_ptr];

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= {s_axis.tlast, s_axis.tdata};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      unique case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end
endmodule
