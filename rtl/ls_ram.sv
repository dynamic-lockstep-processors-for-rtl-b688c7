// ls_ram: code and data RAM of the lock-step monitor (Avalon slave on lsb).
//
// Only the voted safe bus lsb reaches it, so only a majority of lockstepped
// processing blocks can read or write it. The safe code must be placed here
// during system initialisation; this design provides a separate write-only
// load port for that (load_we/load_addr/load_data, word addressed), which has
// priority over a bus write to the same word in the same cycle.
// WORDS x 32-bit with byte enables; addressed by byte address bits
// [2 +: log2(WORDS)]. Reads take two cycles (one wait state, registered read
// port), writes one.
// The paper names triple modular redundancy as one possible form of this RAM
// without making it part of the design, so it is an option here: with
// TMR = 1 every write (load port or bus) goes to three copies of the array
// and a read returns the bitwise two-out-of-three vote of the copies. The
// read that masked a difference between the copies raises `corrected` for
// one cycle, together with the returned data (rsp.waitrequest low). The
// copies are not scrubbed: a masked upset stays in its copy until the word
// is written again. With TMR = 0 (default) there is one array and
// `corrected` stays low.
module ls_ram
  import lsm_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter bit          TMR   = 1'b0,
  localparam int unsigned XW = $clog2(WORDS),
  localparam int unsigned NC = TMR ? 3 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  av_req_t       req,
  output av_rsp_t       rsp,
  input  logic          load_we,
  input  logic [XW-1:0] load_addr,
  input  logic [DW-1:0] load_data,
  output logic          corrected
);

  logic [DW-1:0] rd_copy [NC];
  logic          rd_pending;
  logic [XW-1:0] idx;
  logic          wr_bus;

  assign idx             = req.address[2 +: XW];
  assign wr_bus          = req.write && !(load_we && load_addr == idx);
  assign rsp.waitrequest = req.read && !rd_pending;

  // One array per copy, each with a registered read port.
  for (genvar c = 0; c < NC; c++) begin : g_copy
    logic [DW-1:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (load_we) begin
        mem[load_addr] <= load_data;
      end
      if (wr_bus)
        for (int b = 0; b < DW / 8; b++)
          if (req.byteenable[b]) mem[idx][8*b +: 8] <= req.writedata[8*b +: 8];
      if (req.read && !rd_pending) rd_copy[c] <= mem[idx];
    end
  end

  // Bitwise 2oo3 vote over the registered copies (one copy passes as is).
  if (NC == 3) begin : g_vote
    assign rsp.readdata = (rd_copy[0] & rd_copy[1]) | (rd_copy[0] & rd_copy[2]) |
                          (rd_copy[1] & rd_copy[2]);
    assign corrected    = rd_pending &&
                          (rd_copy[0] != rd_copy[1] || rd_copy[0] != rd_copy[2]);
  end else begin : g_plain
    assign rsp.readdata = rd_copy[0];
    assign corrected    = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_pending <= 1'b0;
    else        rd_pending <= req.read && !rd_pending;
  end

endmodule
