// core_regs -- host-visible core control registers.
//
// A 32-bit Avalon-MM style slave (driven by the host through the PCIe
// bridge) with these word registers:
//   0 CTRL         write 1 to bit 0: start a run (one-cycle pulse to PEs)
//   1 STATUS       bit 0 busy, bit 1 done (read only)
//   2 NUM_SPECTRA  3 SPEC_BASE  4 SPEC_STRIDE  5 PEP_BASE
//   6 NUM_PEPTIDES 7 TOLERANCE  8 SCORE_BASE   9 SCORE_STRIDE
//  10 PE_DONE      per-PE done flags (read only)
//  11 CYCLES       clock cycles of the last run (read only)
// Reads return data one cycle after csr_read with csr_readdatavalid.  A run
// is busy from start until every PE reports done.  The paper says only that
// a set of directly accessible registers holds the computation parameters
// and controls the operation; the register map is this design's own.
module core_regs
  import xcorr_pkg::*;
#(
  parameter int unsigned NUM_PE = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        csr_address,
  input  logic              csr_write,
  input  logic [31:0]       csr_writedata,
  input  logic              csr_read,
  output logic [31:0]       csr_readdata,
  output logic              csr_readdatavalid,
  output core_cfg_t         cfg,
  output logic              start,
  input  logic [NUM_PE-1:0] pe_done
);
  logic        busy, done;
  logic [31:0] cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg               <= '0;
      start             <= 1'b0;
      busy              <= 1'b0;
      done              <= 1'b0;
      cycles            <= '0;
      csr_readdata      <= '0;
      csr_readdatavalid <= 1'b0;
    end else begin
      start <= 1'b0;
      if (csr_write && !busy) begin
        case (csr_address)
          4'd0: if (csr_writedata[0]) begin
                  start  <= 1'b1;
                  busy   <= 1'b1;
                  done   <= 1'b0;
                  cycles <= '0;
                end
          4'd2: cfg.num_spectra  <= csr_writedata;
          4'd3: cfg.spec_base    <= csr_writedata;
          4'd4: cfg.spec_stride  <= csr_writedata;
          4'd5: cfg.pep_base     <= csr_writedata;
          4'd6: cfg.num_peptides <= csr_writedata;
          4'd7: cfg.tolerance    <= csr_writedata;
          4'd8: cfg.score_base   <= csr_writedata;
          4'd9: cfg.score_stride <= csr_writedata;
          default: ;
        endcase
      end
      if (busy) begin
        cycles <= cycles + 1'b1;
        // start is still high in the first busy cycle; PEs clear done then
        if (!start && &pe_done) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      csr_readdatavalid <= csr_read;
      if (csr_read) begin
        case (csr_address)
          4'd1:    csr_readdata <= {30'd0, done, busy};
          4'd2:    csr_readdata <= cfg.num_spectra;
          4'd3:    csr_readdata <= cfg.spec_base;
          4'd4:    csr_readdata <= cfg.spec_stride;
          4'd5:    csr_readdata <= cfg.pep_base;
          4'd6:    csr_readdata <= cfg.num_peptides;
          4'd7:    csr_readdata <= cfg.tolerance;
          4'd8:    csr_readdata <= cfg.score_base;
          4'd9:    csr_readdata <= cfg.score_stride;
          4'd10:   csr_readdata <= 32'(pe_done);
          4'd11:   csr_readdata <= cycles;
          default: csr_readdata <= '0;
        endcase
      end
    end
  end
endmodule
