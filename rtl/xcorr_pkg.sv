// xcorr_pkg -- types, constants and arithmetic helpers shared by the Xcorr
// scoring accelerator.
//
// Data formats.  An experimental or theoretical ion is a 32-bit pair of a
// 16-bit binary m/z bin and a 16-bit IEEE half-precision intensity; sixteen
// pairs make the 512-bit (64-byte) packet that the ion-matching kernel takes
// per on-chip RAM read.  These widths are the paper's.  The m/z bin width
// (1 Da, rounded to nearest), the mass format (unsigned Q16.16 Dalton), the
// peptide record layout, the memory bus structs and the fixed-point score
// accumulator are this design's own choices.
//
// Memory bus.  mem_req_t / mem_rsp_t model an Avalon-MM style master port with
// 512-bit words and word addresses: a command is accepted in a cycle where
// read or write is high and waitrequest is low; read data returns later with
// readdatavalid.  Every master keeps at most one read outstanding.
//
// Score arithmetic.  fp16_mul_fixed() forms the exact product of two finite
// half-precision numbers as a signed fixed-point value with ACC_FRAC
// fraction bits; sums of such products are therefore exact.  fixed_to_fp32()
// converts the accumulated value to single precision, truncating toward zero.
package xcorr_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned BUS_DW    = 512;  // bus / packet width (paper)
  localparam int unsigned BUS_AW    = 32;   // word address width
  localparam int unsigned LANES     = 16;   // ion pairs per packet (paper)
  localparam int unsigned MZ_W      = 16;   // m/z bits (paper)
  localparam int unsigned INT_W     = 16;   // intensity bits, fp16 (paper)
  localparam int unsigned MASS_W    = 32;   // Q16.16 Dalton
  localparam int unsigned MAX_LEN   = 50;   // longest peptide, residues
  localparam int unsigned LEN_W     = 8;
  localparam int unsigned AA_W      = 5;    // residue code width
  localparam int unsigned ACC_W     = 96;   // score accumulator width
  localparam int unsigned ACC_FRAC  = 48;   // its fraction bits
  localparam int unsigned PKT_W     = 8;    // packet counter (Fig. 4: 8 bits)

  // ---------------------------------------------------------------- ions
  typedef struct packed {
    logic [INT_W-1:0] inten;  // fp16 intensity, bits [31:16]
    logic [MZ_W-1:0]  mz;     // m/z bin,        bits [15:0]
  } ion_pair_t;

  typedef ion_pair_t [LANES-1:0] packet_t;  // 512 bits, lane 0 in bits [31:0]

  // One theoretical ion on its way to the kernel.
  typedef struct packed {
    ion_pair_t ion;
    logic      last;   // last ion of the peptide
  } theo_ion_t;

  // ------------------------------------------------------------- peptides
  // Residue codes 1..20 in the alphabetical order of the one-letter codes:
  // A C D E F G H I K L M N P Q R S T V W Y.  Code 0 is unused.
  typedef logic [AA_W-1:0] aa_t;

  // Database record, one 512-bit DRAM word per peptide (low 290 bits used).
  typedef struct packed {
    aa_t [MAX_LEN-1:0] res;    // res[0] is the N-terminal residue
    logic [LEN_W-1:0]  len;    // number of residues, 2..MAX_LEN
    logic [MASS_W-1:0] mass;   // neutral peptide mass, Q16.16 Da
  } peptide_t;

  localparam int unsigned PEP_W = $bits(peptide_t);

  // Spectrum header word (first DRAM word of every spectrum record).
  typedef struct packed {
    logic [PKT_W:0]    npkt;      // number of 512-bit packets, 1..256
    logic [MASS_W-1:0] prec_mass; // neutral precursor mass, Q16.16 Da
  } spec_hdr_t;

  // Summary word written after the scores of a spectrum.
  typedef struct packed {
    logic [31:0] count;       // number of candidate peptides scored
    logic [31:0] first_idx;   // database index of the first candidate
  } result_hdr_t;

  // Monoisotopic residue masses in Q16.16 Da (C carries carbamidomethyl).
  function automatic logic [MASS_W-1:0] residue_mass(aa_t code);
    case (code)
      5'd1:    return 32'd4655488;   // A  71.03711
      5'd2:    return 32'd10487769;  // C 160.03065
      5'd3:    return 32'd7538406;   // D 115.02694
      5'd4:    return 32'd8456935;   // E 129.04259
      5'd5:    return 32'd9638275;   // F 147.06841
      5'd6:    return 32'd3736958;   // G  57.02146
      5'd7:    return 32'd8982293;   // H 137.05891
      5'd8:    return 32'd7411077;   // I 113.08406
      5'd9:    return 32'd8394831;   // K 128.09496
      5'd10:   return 32'd7411077;   // L 113.08406
      5'd11:   return 32'd8587870;   // M 131.04049
      5'd12:   return 32'd7473917;   // N 114.04293
      5'd13:   return 32'd6360450;   // P  97.05276
      5'd14:   return 32'd8392447;   // Q 128.05858
      5'd15:   return 32'd10230242;  // R 156.10111
      5'd16:   return 32'd5703731;   // S  87.03203
      5'd17:   return 32'd6622261;   // T 101.04768
      5'd18:   return 32'd6492547;   // V  99.06841
      5'd19:   return 32'd12194894;  // W 186.07931
      5'd20:   return 32'd10686518;  // Y 163.06333
      default: return '0;
    endcase
  endfunction

  localparam logic [MASS_W-1:0] MASS_H2O    = 32'd1180340;  // 18.010565 Da
  localparam logic [MASS_W-1:0] MASS_PROTON = 32'd66013;    //  1.007276 Da
  localparam logic [INT_W-1:0]  FP16_ONE    = 16'h3C00;

  // Q16.16 mass -> 1-Da m/z bin, rounded to nearest.
  function automatic logic [MZ_W-1:0] mass_to_bin(logic [MASS_W-1:0] m);
    logic [MASS_W:0] r;
    r = {1'b0, m} + 33'd32768;
    return r[MZ_W+15:16];
  endfunction

  // ------------------------------------------------------------ memory bus
  typedef struct packed {
    logic              read;
    logic              write;
    logic [BUS_AW-1:0] address;    // 512-bit word address
    logic [BUS_DW-1:0] writedata;
  } mem_req_t;

  typedef struct packed {
    logic              waitrequest;
    logic              readdatavalid;
    logic [BUS_DW-1:0] readdata;
  } mem_rsp_t;

  // Peptide broadcast: every read returning from DRAM, tagged with its address.
  typedef struct packed {
    logic              valid;
    logic [BUS_AW-1:0] address;
    logic [BUS_DW-1:0] data;
  } bcast_t;

  // --------------------------------------------------- core configuration
  typedef struct packed {
    logic [31:0] num_spectra;   // spectra to score
    logic [31:0] spec_base;     // word address of spectrum 0
    logic [31:0] spec_stride;   // words between spectrum records
    logic [31:0] pep_base;      // word address of peptide record 0
    logic [31:0] num_peptides;  // records in the sorted database
    logic [31:0] tolerance;     // precursor window half-width, Q16.16 Da
    logic [31:0] score_base;    // word address of result record 0
    logic [31:0] score_stride;  // words between result records
  } core_cfg_t;

  // ----------------------------------------------------------- arithmetic
  // Exact product of two finite fp16 numbers as signed fixed point with
  // ACC_FRAC fraction bits.  A value is M * 2^(E-25) with M the 11-bit
  // significand and E the biased exponent (1 for subnormals).
  function automatic logic signed [ACC_W-1:0] fp16_mul_fixed(logic [15:0] a,
                                                             logic [15:0] b);
    logic [10:0]      ma, mb;
    logic [5:0]       ea, eb;
    logic [21:0]      prod;
    logic [6:0]       sh;
    logic [ACC_W-1:0] mag;
    ma   = {(a[14:10] != 5'd0), a[9:0]};
    mb   = {(b[14:10] != 5'd0), b[9:0]};
    ea   = (a[14:10] == 5'd0) ? 6'd1 : {1'b0, a[14:10]};
    eb   = (b[14:10] == 5'd0) ? 6'd1 : {1'b0, b[14:10]};
    prod = ma * mb;
    // value = prod * 2^(ea+eb-50); fixed point = value * 2^48
    sh   = 7'(ea) + 7'(eb) - 7'd2;
    mag  = ACC_W'(prod) << sh;
    return (a[15] ^ b[15]) ? -$signed(mag) : $signed(mag);
  endfunction

  // Signed fixed point (ACC_FRAC fraction bits) -> fp32, truncated.
  function automatic logic [31:0] fixed_to_fp32(logic signed [ACC_W-1:0] v);
    logic             s;
    logic [ACC_W-1:0] mag, norm;
    int unsigned      p;
    logic [7:0]       e;
    s   = v[ACC_W-1];
    mag = s ? -v : v;
    p   = 0;
    for (int unsigned i = 0; i < ACC_W; i++)
      if (mag[i]) p = i;
    if (mag == '0) return 32'd0;
    norm = mag << (ACC_W - 1 - p);
    e    = 8'(p + 127 - ACC_FRAC);
    return {s, e, norm[ACC_W-2 -: 23]};
  endfunction

endpackage
