// tb_ion_matching_kernel -- random spectra (up to 200 peaks, fp16
// intensities of both signs) in a one-cycle-latency packet memory, and the
// theoretical ions of random peptides, some of whose bins are planted in
// the spectrum.  Each score must match the double-precision reference sum
// within fp32 truncation.  Timing checks: one ion per cycle inside a
// packet, three cycles to start a peptide; the read address counts up only.
module tb_ion_matching_kernel;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [PKT_W:0] npkt;
  logic new_spec, ion_valid, ion_ready, rd_req, rd_valid, score_valid, score_ready, busy;
  theo_ion_t ion;
  logic [PKT_W-1:0] rd_idx;
  logic [BUS_DW-1:0] rd_data;
  logic [31:0] score;
  packet_t mem [256];
  int checks = 0, failures = 0, reads = 0, matches_total = 0;
  int last_idx;

  ion_matching_kernel dut (.clk, .rst_n, .npkt, .new_spec, .ion_valid, .ion_ready, .ion,
    .rd_req, .rd_idx, .rd_valid, .rd_data, .score_valid, .score_ready, .score, .busy);
  always #5 clk = ~clk;

  // packet memory, one cycle latency
  always @(posedge clk) begin
    rd_valid <= rd_req;
    if (rd_req) begin
      rd_data <= mem[rd_idx];
      reads++;
    end
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, np, k, cyc, r0;
    int res[];
    int ib[$], mz[$];
    logic [15:0] inten[$];
    real exp;
    new_spec = 0; ion_valid = 0; ion = '0; score_ready = 1; npkt = 1;
    rd_valid = 0; rd_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // --- timing: all ions inside packet 0, one ion per cycle
    mz = {};
    inten = {};
    for (int i = 0; i < 16; i++) begin mz.push_back(100 + 10 * i); inten.push_back(16'h3C00); end
    mem[0] = get_packet(mz, inten, 0);
    @(negedge clk);
    npkt = 1; new_spec = 1;
    @(negedge clk);
    new_spec = 0;
    // 12 ions, bins 100,110,..,210 (all match, intensity 1.0 * 2.0)
    ion_valid = 1;
    cyc = 0;
    k = 0;
    while (k < 12 && cyc < 100) begin
      ion.ion.mz = MZ_W'(100 + 10 * k); ion.ion.inten = 16'h4000; ion.last = (k == 11);
      #1;
      if (ion_ready) k++;
      @(negedge clk);
      cyc++;
    end
    ion_valid = 0;
    // one cycle to see the ion, request, RAM read, then 12 ions in 12 cycles
    check(cyc == 12 + 3, "12 ions in 12 cycles after a 3-cycle packet load");
    while (!score_valid) @(negedge clk);
    check(score == 32'h41C00000, "score 24.0");
    @(negedge clk);

    // --- random spectra and peptides
    for (int s = 0; s < 150; s++) begin
      len = $urandom_range(40, 6);
      rand_residues(len, res);
      ion_bins(len, res, ib);
      make_spectrum($urandom_range(200, 1), ib, 40, mz, inten);
      np = num_packets(mz.size());
      for (int p = 0; p < np; p++) mem[p] = get_packet(mz, inten, p);
      @(negedge clk);
      npkt = (PKT_W+1)'(np); new_spec = 1;
      @(negedge clk);
      new_spec = 0;
      for (int q = 0; q < 3; q++) begin            // 3 peptides per spectrum
        if (q > 0) begin
          len = $urandom_range(40, 6);
          rand_residues(len, res);
          ion_bins(len, res, ib);
        end
        exp = ref_score(ib, mz, inten, 16'h3C00);
        r0 = reads;
        last_idx = -1;
        k = 0;
        cyc = 0;
        while (k < ib.size() && cyc < 5000) begin
          ion_valid = $urandom_range(3) != 0;
          ion.ion.mz = MZ_W'(ib[k]); ion.ion.inten = 16'h3C00; ion.last = (k == ib.size() - 1);
          #1;
          if (rd_req) begin
            check(int'(rd_idx) >= last_idx, "address counts up");
            last_idx = int'(rd_idx);
          end
          if (ion_valid && ion_ready) k++;
          @(negedge clk);
          cyc++;
        end
        ion_valid = 0;
        score_ready = 0;
        while (!score_valid && cyc < 6000) begin @(negedge clk); cyc++; end
        repeat ($urandom_range(3)) @(negedge clk);
        check(score_valid, "score held until accepted");
        check(score_ok(score, exp), "score value");
        if (!score_ok(score, exp)) $display("  got %h (%f) exp %f", score, fp32_to_real(score), exp);
        if (exp != 0.0) matches_total++;
        check(reads - r0 <= np, "each packet read at most once per peptide");
        score_ready = 1;
        @(negedge clk);
      end
    end
    check(matches_total > 100, "nonzero scores exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
