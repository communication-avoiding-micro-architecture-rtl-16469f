// tb_ion_generator -- random peptides of 2..50 residues; the ion stream must
// equal the reference b/y bins in ascending order, with `last` on the final
// ion, at one ion per cycle when the consumer is always ready; a second
// pass applies random back-pressure.
module tb_ion_generator;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pep_valid, pep_ready, ion_valid, ion_ready, busy;
  peptide_t pep;
  theo_ion_t ion;
  int checks = 0, failures = 0;

  ion_generator dut (.clk, .rst_n, .pep_valid, .pep_ready, .pep, .ion_valid, .ion_ready, .ion, .busy);
  always #5 clk = ~clk;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, n, cyc;
    int res[];
    int ib[$];
    pep_valid = 0; ion_ready = 1; pep = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      len = (t < 20) ? 2 + t : $urandom_range(MAX_LEN, 2);
      rand_residues(len, res);
      ion_bins(len, res, ib);
      @(negedge clk);
      pep = make_pep(len, res);
      pep_valid = 1;
      @(posedge clk);
      check(pep_ready, "peptide taken when idle");
      @(negedge clk);
      pep_valid = 0;
      n = 0;
      cyc = 0;
      while (n < ib.size() && cyc < 500) begin
        ion_ready = (t < 300) ? 1'b1 : 1'($urandom_range(1));
        #1;
        if (ion_valid && ion_ready) begin
          check(ion.ion.mz == MZ_W'(ib[n]), "ion m/z");
          check(ion.ion.inten == 16'h3C00, "ion intensity");
          check(ion.last == (n == ib.size() - 1), "last flag");
          n++;
        end
        @(negedge clk);
        cyc++;
      end
      check(n == ib.size(), "ion count");
      if (t < 300) check(cyc == 2 * (len - 1), "one ion per cycle");
      check(!ion_valid, "idle after last ion");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
