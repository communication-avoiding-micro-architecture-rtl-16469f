// spectrum_cache -- on-chip RAM holding the experimental spectrum of the
// spectrum a PE is scoring (the PE's local cache).
//
// CACHE_WORDS words of 512 bits; each word is one packet of 16 ion pairs.
// With the default 32 words the cache is 2 kB, the size the paper selects.
// The cache holds a window of consecutive packets [base, base+CACHE_WORDS)
// of the spectrum; a spectrum of up to CACHE_WORDS packets is held whole and
// is read from DRAM once.  A longer spectrum does not fit: a read of a
// packet outside the window raises `miss` with the packet number, and the
// PE controller refills the window from DRAM starting at that packet and
// sets the new base, after which the waiting read completes.  This windowed
// refill is this design's choice; the paper only reports that spectra not
// fitting the cache cost repeated DRAM accesses.
//
// Read side (ion-matching kernel): rd_req with packet number rd_idx; on a
// hit rd_valid and rd_data follow one cycle later.  Fill side (controller):
// invalidate, then fill_we/fill_addr/fill_data per word, then set_base with
// the packet number held in word 0 of the window.
module spectrum_cache
  import xcorr_pkg::*;
#(
  parameter int unsigned CACHE_WORDS = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // fill port
  input  logic                           invalidate,
  input  logic                           fill_we,
  input  logic [$clog2(CACHE_WORDS)-1:0] fill_addr,
  input  logic [BUS_DW-1:0]              fill_data,
  input  logic                           set_base,
  input  logic [PKT_W-1:0]               base_in,
  // read port
  input  logic                           rd_req,
  input  logic [PKT_W-1:0]               rd_idx,
  output logic                           rd_valid,
  output logic [BUS_DW-1:0]              rd_data,
  // miss report
  output logic                           miss,
  output logic [PKT_W-1:0]               miss_idx
);
  localparam int unsigned CA = $clog2(CACHE_WORDS);

  logic [BUS_DW-1:0] mem [CACHE_WORDS];
  logic              win_valid;
  logic [PKT_W-1:0]  base;
  logic              pend;
  logic [PKT_W-1:0]  pend_idx;
  logic [PKT_W-1:0]  cur_idx;
  logic              active, hit;
  logic [PKT_W-1:0]  offs;

  function automatic logic in_window(logic [PKT_W-1:0] idx, logic [PKT_W-1:0] b);
    return ({1'b0, idx} >= {1'b0, b}) &&
           ({1'b0, idx} < ({1'b0, b} + (PKT_W+1)'(CACHE_WORDS)));
  endfunction

  assign active   = rd_req | pend;
  assign cur_idx  = rd_req ? rd_idx : pend_idx;
  assign hit      = win_valid && in_window(cur_idx, base);
  assign offs     = cur_idx - base;
  assign miss     = pend && !(win_valid && in_window(pend_idx, base));
  assign miss_idx = pend_idx;

  always_ff @(posedge clk) begin
    if (fill_we) mem[fill_addr] <= fill_data;
    if (active && hit) rd_data <= mem[offs[CA-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0;
      base      <= '0;
      pend      <= 1'b0;
      pend_idx  <= '0;
      rd_valid  <= 1'b0;
    end else begin
      if (invalidate) win_valid <= 1'b0;
      else if (set_base) begin
        win_valid <= 1'b1;
        base      <= base_in;
      end
      rd_valid <= active && hit;
      if (active && !hit) begin
        pend     <= 1'b1;
        pend_idx <= cur_idx;
      end else if (active) begin
        pend     <= 1'b0;
      end
    end
  end

  a_no_req_while_pending: assert property (@(posedge clk) disable iff (!rst_n) !(rd_req && pend));
endmodule
