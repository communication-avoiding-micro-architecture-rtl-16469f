// sync_fifo -- synchronous FIFO; in the PE it is the peptide FIFO between
// the binary-search/pre-fetch module and the ion generator.
//
// A circular buffer of DEPTH entries with read and write pointers one bit
// wider than the index, so full and empty are told apart.  Ready/valid on
// both sides: an entry is written when in_valid && in_ready and removed when
// out_valid && out_ready; out_data shows the oldest entry (first-word
// fall-through).  Reads and writes can happen in the same cycle.  The paper
// draws the peptide FIFO but gives no depth; DEPTH = 8 is this design's.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,      // empty the FIFO
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (flush) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
