// ion_generator -- turns a candidate peptide into its theoretical spectrum:
// the singly charged b- and y-ion series, delivered in ascending m/z.
//
// For a peptide of L residues r[0..L-1] the b ions are the prefix sums
// r[0]+..+r[i-1] + proton (i = 1..L-1) and the y ions the suffix sums
// r[L-j]+..+r[L-1] + water + proton (j = 1..L-1).  Both series rise
// monotonically, so the generator keeps one running sum for each and emits
// the smaller of the two next ions each cycle (a two-way merge).  The
// ion-matching kernel walks the experimental spectrum only forward, so this
// order is required.  Each ion is a 32-bit pair: 16-bit m/z bin (mass
// rounded to 1 Da) and fp16 intensity ION_INTEN (1.0 by default).
//
// The paper gives the generator's function (read a peptide from the FIFO,
// produce 32-bit ion/intensity pairs); the ion types, charge 1, the merge,
// the binning and the constant intensity are this design's choices.
//
// Timing: one cycle to take a peptide, then one ion per cycle, 2(L-1) ions.
// Ports: pep_* ready/valid peptide records in, ion_* ready/valid ions out
// (ion.last marks a peptide's final ion).  The record's precomputed mass
// field is not read: fragment masses come from the residues alone.
module ion_generator
  import xcorr_pkg::*;
#(
  parameter logic [15:0] ION_INTEN = 16'h3C00
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      pep_valid,
  output logic      pep_ready,
  input  peptide_t  pep,
  output logic      ion_valid,
  input  logic      ion_ready,
  output theo_ion_t ion,
  output logic      busy
);
  aa_t [MAX_LEN-1:0]  res;
  logic [LEN_W-1:0]   len, bi, yj;
  logic [MASS_W-1:0]  bsum, ysum, bmass, ymass;
  logic               gen, b_left, y_left, take_b, last;

  assign pep_ready = !gen;
  assign ion_valid = gen;
  assign busy      = gen;
  assign bmass     = bsum + MASS_PROTON;
  assign ymass     = ysum + MASS_H2O + MASS_PROTON;
  assign b_left    = bi < len;
  assign y_left    = yj < len;
  assign take_b    = b_left && (!y_left || bmass <= ymass);
  assign last      = take_b ? (bi + 1'b1 == len && !y_left)
                            : (yj + 1'b1 == len && !b_left);

  always_comb begin
    ion.ion.mz    = mass_to_bin(take_b ? bmass : ymass);
    ion.ion.inten = ION_INTEN;
    ion.last      = last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen  <= 1'b0;
      res  <= '0;
      len  <= '0;
      bi   <= '0;
      yj   <= '0;
      bsum <= '0;
      ysum <= '0;
    end else if (!gen) begin
      if (pep_valid) begin
        gen  <= 1'b1;
        res  <= pep.res;
        len  <= pep.len;
        bi   <= LEN_W'(1);
        yj   <= LEN_W'(1);
        bsum <= residue_mass(pep.res[0]);
        ysum <= residue_mass(pep.res[pep.len - 1'b1]);
      end
    end else if (ion_ready) begin
      if (take_b) begin
        bsum <= bsum + residue_mass(res[bi]);
        bi   <= bi + 1'b1;
      end else begin
        ysum <= ysum + residue_mass(res[len - 1'b1 - yj]);
        yj   <= yj + 1'b1;
      end
      if (last) gen <= 1'b0;
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          pep_valid && pep_ready |-> pep.len >= 2 && pep.len <= LEN_W'(MAX_LEN));
endmodule
