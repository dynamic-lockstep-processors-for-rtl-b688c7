// system_ram: the shared RAM of the processing blocks (Avalon slave).
//
// WORDS x 32-bit array with byte enables, addressed by byte address bits
// [2 +: log2(WORDS)] (higher bits are ignored; the interconnect decodes the
// window). The read port is registered so that the array maps onto block
// RAM: a read is stalled for one cycle (waitrequest high) and completes in the
// second, a write completes in the cycle it is presented. The size and the
// timing are this design's; the paper only names the RAM.
module system_ram
  import lsm_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned XW = $clog2(WORDS)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  av_req_t req,
  output av_rsp_t rsp
);

  logic [DW-1:0] mem [WORDS];
  logic [DW-1:0] rdata;
  logic          rd_pending;
  logic [XW-1:0] idx;

  assign idx             = req.address[2 +: XW];
  assign rsp.readdata    = rdata;
  assign rsp.waitrequest = req.read && !rd_pending;

  always_ff @(posedge clk) begin
    if (req.write)
      for (int b = 0; b < DW / 8; b++)
        if (req.byteenable[b]) mem[idx][8*b +: 8] <= req.writedata[8*b +: 8];
    if (req.read && !rd_pending) rdata <= mem[idx];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_pending <= 1'b0;
    else        rd_pending <= req.read && !rd_pending;
  end

endmodule
