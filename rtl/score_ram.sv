// score_ram -- on-chip RAM collecting the Xcorr scores of one spectrum
// before they are copied to DRAM.
//
// WORDS words of 512 bits, each word holding 16 32-bit scores.  A score is
// written into one 32-bit lane (write address = score number: word
// wr_idx / 16, lane wr_idx % 16); a whole word is read at a time for the
// copy-out, with one cycle of read latency.  The paper draws this RAM and its
// write address; the lane-wise write and WORDS = 16 (256 scores, 1 kB) are
// this design's own choices.  Score RAM is drained whenever it fills, so its
// size limits only how often a PE asks for the bus, not the candidate count.
module score_ram #(
  parameter int unsigned WORDS = 16
) (
  input  logic                               clk,
  input  logic                               we,
  input  logic [$clog2(WORDS)+3:0]           wr_idx,
  input  logic [31:0]                        wr_score,
  input  logic [$clog2(WORDS)-1:0]           rd_addr,
  output logic [511:0]                       rd_data
);
  logic [15:0][31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_idx[$clog2(WORDS)+3:4]][wr_idx[3:0]] <= wr_score;
    rd_data <= mem[rd_addr];
  end
endmodule
