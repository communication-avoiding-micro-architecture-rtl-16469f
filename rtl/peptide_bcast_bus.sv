// peptide_bcast_bus -- broadcasts every word read from DRAM to all PEs.
//
// The arbiter's memory-side port is observed: when a read command is
// accepted (read high, waitrequest low) its word address is latched, and
// when the matching read data returns it is driven to every processing
// element as {valid, address, data} for one cycle.  A PE whose peptide
// pre-fetcher needs that same database record takes it from the broadcast
// instead of issuing a DRAM read of its own, so one fetch of a peptide can
// serve several PEs.  The paper names a peptide broadcast bus that makes
// fetched peptides available to all PEs; the address tag and the snooping
// rule are this design's own.
//
// Timing: bcast is registered; it is valid one cycle after readdatavalid.
// Relies on the bus carrying at most one outstanding read, which holds
// because the arbiter serves one master at a time and each master keeps one
// read in flight.
module peptide_bcast_bus
  import xcorr_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t s_req,
  input  mem_rsp_t s_rsp,
  output bcast_t   bcast
);
  logic [BUS_AW-1:0] rd_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr <= '0;
      bcast   <= '0;
    end else begin
      if (s_req.read && !s_rsp.waitrequest) rd_addr <= s_req.address;
      bcast.valid <= s_rsp.readdatavalid;
      if (s_rsp.readdatavalid) begin
        bcast.address <= rd_addr;
        bcast.data    <= s_rsp.readdata;
      end
    end
  end
endmodule
