// axis_if: one AXI4-Stream channel (tdata, tvalid, tready, tlast) as used
// between the DMA engine, the inference engine and the output FIFO.
//
// A beat moves on a rising clock edge where tvalid and tready are both high.
// The interface checks the stream rule that a source, once it raises tvalid,
// keeps tvalid high and tdata/tlast unchanged until the beat is taken. tkeep
// is left out: every beat is a full word in this design.
interface axis_if #(
  parameter int unsigned DATA_W = 512
) (
  input logic clk,
  input logic rst_n
);
  logic [DATA_W-1:0] tdata;
  logic              tvalid;
  logic              tready;
  logic              tlast;

  modport src (output tdata, tvalid, tlast, input tready);
  modport snk (input tdata, tvalid, tlast, output tready);

  property p_hold_until_ready;
    @(posedge clk) disable iff (!rst_n)
      (tvalid && !tready) |=> (tvalid && $stable(tdata) && $stable(tlast));
  endproperty
  a_hold_until_ready: assert property (p_hold_until_ready)
    else $error("axis_if: tvalid dropped or payload changed before tready");

endinterface
