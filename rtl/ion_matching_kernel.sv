// ion_matching_kernel -- dot product of one theoretical spectrum with the
// cached experimental spectrum, one theoretical ion per clock.
//
// The current 512-bit packet of the experimental spectrum (16 ion pairs in
// ascending m/z) is held in 16 32-bit registers.  Each cycle the m/z of the
// incoming theoretical ion is compared with all 16 experimental m/z values
// by 16 parallel ">=" comparators; the first lane at or above the
// theoretical m/z drives the multiplexer select, and if that lane's m/z is
// equal to the theoretical one, its intensity is multiplied by the
// theoretical intensity and added to the score register.  A further
// comparator checks the theoretical m/z against the last (largest) m/z of
// the packet: if the ion lies beyond the packet, the up-counter that forms
// the on-chip RAM read address is incremented, the next packet is fetched and
// the ion is held.  When the peptide's last ion has been consumed the score
// is presented on the score port and the counter returns to packet 0 for
// the next peptide.  Packet registers, comparators, multiplexer, multiplier,
// adder, score register and the 8-bit up-counter are the paper's; the
// equality test after the ">=" select, the exact fixed-point accumulation
// (converted to fp32 on output) and the handshakes are this design's.
//
// The m/z values are 1-Da bins, so a theoretical ion matches at most one
// experimental peak.  The last packet of a spectrum is padded with
// m/z 0xFFFF, intensity 0.
//
// Timing: one theoretical ion per cycle while the ion stays inside the
// current packet; a packet change costs 2 cycles (request, RAM read) plus
// any cache-miss time; the score appears 1 cycle after the last ion.
//
// Ports: npkt (packets in the spectrum, stable while scoring), new_spec
// (pulse: a new spectrum has been loaded), ion_* (ready/valid theoretical
// ions), rd_* (packet read port of the spectrum cache), score_* (ready/valid
// fp32 Xcorr score, one per peptide).
module ion_matching_kernel
  import xcorr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PKT_W:0]    npkt,
  input  logic              new_spec,
  input  logic              ion_valid,
  output logic              ion_ready,
  input  theo_ion_t         ion,
  output logic              rd_req,
  output logic [PKT_W-1:0]  rd_idx,
  input  logic              rd_valid,
  input  logic [BUS_DW-1:0] rd_data,
  output logic              score_valid,
  input  logic              score_ready,
  output logic [31:0]       score,
  output logic              busy
);
  typedef enum logic [2:0] {S_WAIT_ION, S_LOAD_REQ, S_LOAD_WAIT, S_RUN, S_OUT} state_t;

  state_t                  state;
  packet_t                 pkt;         // 16 experimental ion registers
  logic                    pkt_ok;      // pkt holds packet `cnt`
  logic [PKT_W-1:0]        cnt;         // up-counter = RAM read address
  logic signed [ACC_W-1:0] acc;         // score register

  logic [LANES-1:0]        ge;
  logic [$clog2(LANES)-1:0] sel;
  logic                    match, beyond, advance, last_pkt;
  logic signed [ACC_W-1:0] prod, acc_n;

  // Parallel comparators and the multiplexer select.
  always_comb begin
    for (int unsigned i = 0; i < LANES; i++)
      ge[i] = pkt[i].mz >= ion.ion.mz;
    sel = '0;
    for (int i = LANES - 1; i >= 0; i--)
      if (ge[i]) sel = $clog2(LANES)'(i);
  end

  assign match    = (|ge) && (pkt[sel].mz == ion.ion.mz);
  assign beyond   = !ge[LANES-1];
  assign last_pkt = ({1'b0, cnt} + 1'b1) >= npkt;
  assign advance  = beyond && !last_pkt;
  assign prod     = fp16_mul_fixed(pkt[sel].inten, ion.ion.inten);
  assign acc_n    = acc + (match ? prod : '0);

  assign ion_ready = (state == S_RUN) && !advance;
  assign rd_req    = (state == S_LOAD_REQ);
  assign rd_idx    = cnt;
  assign busy      = (state != S_WAIT_ION);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_WAIT_ION;
      pkt         <= '0;
      pkt_ok      <= 1'b0;
      cnt         <= '0;
      acc         <= '0;
      score       <= '0;
      score_valid <= 1'b0;
    end else begin
      case (state)
        S_WAIT_ION: begin
          if (new_spec) begin
            pkt_ok <= 1'b0;
            cnt    <= '0;
          end else if (ion_valid) begin
            if (pkt_ok && cnt == '0) state <= S_RUN;
            else begin
              cnt   <= '0;
              state <= S_LOAD_REQ;
            end
          end
        end
        S_LOAD_REQ: state <= S_LOAD_WAIT;
        S_LOAD_WAIT: if (rd_valid) begin
          pkt    <= rd_data;
          pkt_ok <= 1'b1;
          state  <= S_RUN;
        end
        S_RUN: if (ion_valid) begin
          if (advance) begin                 // count up: next packet
            cnt    <= cnt + 1'b1;
            pkt_ok <= 1'b0;
            state  <= S_LOAD_REQ;
          end else if (ion.last) begin
            score       <= fixed_to_fp32(acc_n);
            score_valid <= 1'b1;
            acc         <= '0;
            state       <= S_OUT;
          end else begin
            acc <= acc_n;
          end
        end
        S_OUT: if (score_ready) begin
          score_valid <= 1'b0;
          state       <= S_WAIT_ION;
        end
        default: state <= S_WAIT_ION;
      endcase
    end
  end

  a_score_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                   score_valid && !score_ready |=> score_valid && $stable(score));
endmodule
