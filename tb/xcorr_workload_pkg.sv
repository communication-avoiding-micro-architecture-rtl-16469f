// xcorr_workload_pkg -- builds a complete scoring workload for the PE and
// system testbenches: a mass-sorted random peptide database, spectra whose
// precursor masses sit near database peptides and whose peaks include many
// of those peptides' fragment bins, the DRAM image in the layout the
// accelerator reads, and the expected candidate ranges and Xcorr scores
// (double precision, computed here independently of the RTL).
//
// DRAM layout (512-bit words): peptide records from PEP_BASE; spectrum s at
// SPEC_BASE + s*SPEC_STRIDE (header, then packets); result record s at
// SCORE_BASE + s*SCORE_STRIDE (summary word, then 16 scores per word).
package xcorr_workload_pkg;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;

  localparam int PEP_BASE     = 0;
  localparam int SPEC_BASE    = 8192;
  localparam int SPEC_STRIDE  = 300;
  localparam int SCORE_STRIDE = 80;

  logic [BUS_DW-1:0] img [int];       // DRAM image, word address -> data
  peptide_t          db [];
  int                score_base;
  longint            prec [];
  int                exp_first [], exp_count [];
  real               exp_score [][$];

  function automatic int ceil16(int n);
    return (n + 15) / 16;
  endfunction

  // n_pep peptides of 6..max_len residues, n_spec spectra of
  // min_peaks..max_peaks peaks, precursor window +-tol_da.  Each spectrum is
  // made from one database peptide (precursor within 0.5 Da of its mass):
  // a random one, or with in_order set consecutive peptides from the middle
  // of the database, so that spectra come in ascending precursor order and
  // neighbouring spectra share most of their candidates.
  function automatic void build(int n_pep, int n_spec, int max_peaks, int max_len, real tol_da,
                                int min_peaks = 1, bit in_order = 1'b0);
    peptide_t tmp;
    int res[], ib[$], mz[$];
    logic [15:0] inten[$];
    longint lo, hi;
    int np, src, len, start;
    img.delete();
    db = new[n_pep];
    for (int i = 0; i < n_pep; i++) begin
      rand_residues($urandom_range(max_len, 6), res);
      db[i] = make_pep(res.size(), res);
      for (int j = i; j > 0 && db[j].mass < db[j-1].mass; j--) begin
        tmp = db[j]; db[j] = db[j-1]; db[j-1] = tmp;
      end
    end
    foreach (db[i]) img[PEP_BASE + i] = BUS_DW'(db[i]);
    score_base = SPEC_BASE + n_spec * SPEC_STRIDE;
    prec      = new[n_spec];
    exp_first = new[n_spec];
    exp_count = new[n_spec];
    exp_score = new[n_spec];
    start = 0;
    if (in_order) start = $urandom_range(n_pep / 3, n_pep / 3 + n_pep / 3);
    for (int s = 0; s < n_spec; s++) begin
      spec_hdr_t h;
      if (in_order) src = (start + s) % n_pep;
      else          src = $urandom_range(n_pep - 1);
      prec[s] = longint'(db[src].mass) + longint'($urandom_range(65536)) - 32768;
      len = int'(db[src].len);
      res = new[len];
      foreach (res[i]) res[i] = int'(db[src].res[i]);
      ion_bins(len, res, ib);
      make_spectrum($urandom_range(max_peaks, min_peaks), ib, 30, mz, inten);
      np = num_packets(mz.size());
      h = '0;
      h.npkt = (PKT_W+1)'(np);
      h.prec_mass = MASS_W'(prec[s]);
      img[SPEC_BASE + s * SPEC_STRIDE] = BUS_DW'(h);
      for (int p = 0; p < np; p++) img[SPEC_BASE + s * SPEC_STRIDE + 1 + p] = get_packet(mz, inten, p);
      // expected candidates and scores
      lo = prec[s] - q16(tol_da);
      hi = prec[s] + q16(tol_da);
      exp_first[s] = n_pep;
      for (int i = n_pep - 1; i >= 0; i--) if (longint'(db[i].mass) >= lo) exp_first[s] = i;
      exp_count[s] = 0;
      exp_score[s] = {};
      for (int i = exp_first[s]; i < n_pep && longint'(db[i].mass) <= hi; i++) begin
        len = int'(db[i].len);
        res = new[len];
        foreach (res[k]) res[k] = int'(db[i].res[k]);
        ion_bins(len, res, ib);
        exp_score[s].push_back(ref_score(ib, mz, inten, 16'h3C00));
        exp_count[s]++;
      end
    end
  endfunction

  // Result words copied back from DRAM by the testbench.
  logic [BUS_DW-1:0] out_img [int];

  // Compare the result record of spectrum s; returns checks and failures.
  function automatic void check_spectrum(int s, inout int checks, inout int failures);
    result_hdr_t hd;
    logic [31:0] sc;
    int base;
    base = score_base + s * SCORE_STRIDE;
    hd = out_img[base][$bits(result_hdr_t)-1:0];
    checks += 2;
    if (hd.first_idx != 32'(exp_first[s])) begin
      failures++;
      $display("FAIL spectrum %0d first %0d exp %0d", s, hd.first_idx, exp_first[s]);
    end
    if (hd.count != 32'(exp_count[s])) begin
      failures++;
      $display("FAIL spectrum %0d count %0d exp %0d", s, hd.count, exp_count[s]);
    end
    for (int k = 0; k < exp_count[s] && k < (SCORE_STRIDE - 1) * 16; k++) begin
      sc = out_img[base + 1 + k / 16][32 * (k % 16) +: 32];
      checks++;
      if (!score_ok(sc, exp_score[s][k])) begin
        failures++;
        if (failures < 10)
          $display("FAIL spectrum %0d score %0d got %f exp %f", s, k, fp32_to_real(sc), exp_score[s][k]);
      end
    end
  endfunction
endpackage
