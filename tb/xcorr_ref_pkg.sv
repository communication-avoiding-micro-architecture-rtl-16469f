// xcorr_ref_pkg -- reference arithmetic and data generators for the
// testbenches, written independently of the RTL: masses are derived from
// Dalton values, fp16 values are decoded to real numbers and scores are
// summed in double precision.
package xcorr_ref_pkg;
  import xcorr_pkg::*;

  // Residue masses in Da, codes 1..20 = A C D E F G H I K L M N P Q R S T V W Y
  function automatic real aa_da(int code);
    case (code)
      1: return 71.03711;   2: return 160.03065;  3: return 115.02694;
      4: return 129.04259;  5: return 147.06841;  6: return 57.02146;
      7: return 137.05891;  8: return 113.08406;  9: return 128.09496;
      10: return 113.08406; 11: return 131.04049; 12: return 114.04293;
      13: return 97.05276;  14: return 128.05858; 15: return 156.10111;
      16: return 87.03203;  17: return 101.04768; 18: return 99.06841;
      19: return 186.07931; 20: return 163.06333;
      default: return 0.0;
    endcase
  endfunction

  function automatic longint q16(real da);
    return longint'($floor(da * 65536.0 + 0.5));
  endfunction

  localparam real H2O_DA    = 18.010565;
  localparam real PROTON_DA = 1.007276;

  function automatic real fp16_to_real(logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) v = real'(h[9:0]) * (2.0 ** -24);
    else        v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic real fp32_to_real(logic [31:0] f);
    real v;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) v = real'(f[22:0]) * (2.0 ** -149);
    else        v = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -v : v;
  endfunction

  // random finite fp16 with magnitude between 2^-6 and 2^6
  function automatic logic [15:0] rand_fp16();
    logic [15:0] h;
    h[15]    = 1'($urandom_range(1));
    h[14:10] = 5'($urandom_range(21, 9));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  // Theoretical ion ibin of a peptide (b and y, charge 1), ascending.
  function automatic void ion_bins(input int len, input int res[], output int ibin[$]);
    longint b, y, m[$];
    ibin = {};
    m = {};
    b = 0;
    y = 0;
    for (int i = 1; i < len; i++) begin
      b += q16(aa_da(res[i-1]));
      m.push_back(b + q16(PROTON_DA));
    end
    for (int j = 1; j < len; j++) begin
      y += q16(aa_da(res[len-j]));
      m.push_back(y + q16(H2O_DA) + q16(PROTON_DA));
    end
    m.sort();
    foreach (m[k]) ibin.push_back(int'((m[k] + 32768) >>> 16));
  endfunction

  function automatic longint pep_mass_q16(int len, int res[]);
    longint s;
    s = q16(H2O_DA);
    for (int i = 0; i < len; i++) s += q16(aa_da(res[i]));
    return s;
  endfunction

  function automatic peptide_t make_pep(int len, int res[]);
    peptide_t p;
    p      = '0;
    p.len  = LEN_W'(len);
    p.mass = MASS_W'(pep_mass_q16(len, res));
    for (int i = 0; i < len; i++) p.res[i] = AA_W'(res[i]);
    return p;
  endfunction

  // Xcorr reference: sum over theoretical ions of matched intensity * ion_int.
  function automatic real ref_score(int ibin[$], int mz[$], logic [15:0] inten[$],
                                    logic [15:0] ion_int);
    real s;
    s = 0.0;
    foreach (ibin[k])
      foreach (mz[j])
        if (mz[j] == ibin[k]) s += fp16_to_real(inten[j]) * fp16_to_real(ion_int);
    return s;
  endfunction

  function automatic bit score_ok(logic [31:0] got, real exp);
    real g, tol;
    g   = fp32_to_real(got);
    tol = ((exp < 0.0) ? -exp : exp) * (2.0 ** -21) + 1.0e-30;
    return ((g - exp) <= tol) && ((exp - g) <= tol);
  endfunction

  // Random sorted, unique spectrum of n peaks: with probability hit_pct a
  // peak sits on one of the given ibin, otherwise at a random bin.
  function automatic void make_spectrum(input int n, input int ibin[$], input int hit_pct,
                                        output int mz[$], output logic [15:0] inten[$]);
    int used[int];
    int b;
    mz = {};
    inten = {};
    for (int k = 0; k < n * 4 && used.num() < n; k++) begin
      if (ibin.size() > 0 && $urandom_range(99) < hit_pct)
        b = ibin[$urandom_range(ibin.size() - 1)];
      else
        b = $urandom_range(3000, 50);
      used[b] = 1;
    end
    foreach (used[k]) mz.push_back(k);
    mz.sort();
    foreach (mz[k]) inten.push_back(rand_fp16());
  endfunction

  // Packets of a spectrum (16 pairs each, padded with m/z 0xFFFF, intensity 0).
  function automatic int num_packets(int n);
    return (n + LANES - 1) / LANES + ((n == 0) ? 1 : 0);
  endfunction

  function automatic packet_t get_packet(int mz[$], logic [15:0] inten[$], int p);
    packet_t pk;
    for (int l = 0; l < LANES; l++) begin
      if (p * LANES + l < mz.size()) begin
        pk[l].mz    = MZ_W'(mz[p * LANES + l]);
        pk[l].inten = inten[p * LANES + l];
      end else begin
        pk[l].mz    = 16'hFFFF;
        pk[l].inten = 16'h0000;
      end
    end
    return pk;
  endfunction

  function automatic void rand_residues(input int len, output int res[]);
    res = new[len];
    foreach (res[i]) res[i] = $urandom_range(20, 1);
  endfunction
endpackage
