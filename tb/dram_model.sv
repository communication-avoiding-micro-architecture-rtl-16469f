// dram_model -- behavioural model of the DRAM behind the accelerator's
// memory port (stands in for the interconnect, memory controller and DDR4).
// Not synthesizable design content; testbench use only.
//
// 512-bit words, word addresses, WORDS words.  A command is accepted when
// read or write is high and waitrequest is low; waitrequest is high in a
// random STALL_PCT percent of cycles.  Read data returns LAT cycles after
// acceptance with readdatavalid.  Testbenches load and inspect `mem`
// directly and read the access counters.
module dram_model
  import xcorr_pkg::*;
#(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  logic [BUS_DW-1:0] mem [WORDS];
  logic [LAT-1:0]              pv;
  logic [LAT-1:0][BUS_DW-1:0]  pd;
  logic                        stall;
  int unsigned                 reads, writes;

  assign rsp.waitrequest   = stall;
  assign rsp.readdatavalid = pv[LAT-1];
  assign rsp.readdata      = pd[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv     <= '0;
      pd     <= '0;
      stall  <= 1'b0;
      reads  <= 0;
      writes <= 0;
    end else begin
      stall <= ($urandom_range(99) < STALL_PCT);
      pv    <= {pv[LAT-2:0], 1'b0};
      pd    <= {pd[LAT-2:0], {BUS_DW{1'b0}}};
      if (req.read && !stall) begin
        pv[0] <= 1'b1;
        pd[0] <= mem[req.address % WORDS];
        reads <= reads + 1;
      end
      if (req.write && !stall) begin
        mem[req.address % WORDS] <= req.writedata;
        writes <= writes + 1;
      end
    end
  end
endmodule
