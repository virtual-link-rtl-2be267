// vl_link_tab: the Link Table (linkTab) of the routing device.
//
// One row per SQI holds a valid bit and the head and tail pointers of two
// linked lists threaded through the shared buffers: the producer list in
// prodBuf's LINK partition (prodHead/prodTail, data waiting for a consumer)
// and the consumer list in consBuf (consHead/consTail, requests waiting for
// data). The paper gives the row contents; the ports are this design's.
//
// Ports:
//   cfg_*  : system software enables or disables an SQI (done at mmap time
//            in the paper). Enabling or disabling clears the row's pointers.
//   rd_*   : combinational read of a whole row, used by stage 1 of the
//            address-mapping pipeline.
//   chk_*  : combinational read of the valid bit, used by the input port.
//   wr_*   : pointer write from stage 3 of the pipeline; the valid bit is
//            left as it is. A cfg write to the same row in the same cycle wins.
// Writes take effect at the next clock edge. Reset clears every row.
module vl_link_tab
  import vl_pkg::*;
#(
  parameter int unsigned NUM_SQI = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cfg_we,
  input  vl_sqi_t   cfg_sqi,
  input  logic      cfg_v,
  input  vl_sqi_t   rd_sqi,
  output vl_ltrow_t rd_row,
  input  vl_sqi_t   chk_sqi,
  output logic      chk_v,
  input  logic      wr_en,
  input  vl_sqi_t   wr_sqi,
  input  vl_ltrow_t wr_row
);
  vl_ltrow_t rows [NUM_SQI];

  initial assert (NUM_SQI <= 2**VL_SQI_W) else $fatal(1, "NUM_SQI too large");

  always_comb begin
    rd_row = (int'(rd_sqi) < NUM_SQI) ? rows[rd_sqi] : '0;
    chk_v  = (int'(chk_sqi) < NUM_SQI) ? rows[chk_sqi].v : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_SQI; i++) rows[i] <= '0;
    end else begin
      if (wr_en && int'(wr_sqi) < NUM_SQI) begin
        rows[wr_sqi].prod_head <= wr_row.prod_head;
        rows[wr_sqi].prod_tail <= wr_row.prod_tail;
        rows[wr_sqi].cons_head <= wr_row.cons_head;
        rows[wr_sqi].cons_tail <= wr_row.cons_tail;
      end
      if (cfg_we && int'(cfg_sqi) < NUM_SQI) begin
        rows[cfg_sqi] <= '{v: cfg_v, default: '0};
      end
    end
  end
endmodule
