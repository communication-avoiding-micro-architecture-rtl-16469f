// binary_search -- finds the candidate peptides of a spectrum in the
// mass-sorted peptide database and pre-fetches them into the peptide FIFO.
//
// On `start` the module binary-searches the database (one 512-bit record
// per peptide, ascending neutral mass, at pep_base) for the first record
// whose mass is at least prec_mass - tolerance; each probe is one bus read.
// From there it reads the following records one after another and pushes
// every record with mass <= prec_mass + tolerance into the FIFO, stopping at
// the first heavier record or the end of the database.  The search runs once
// per spectrum; after it the candidates are fetched in order ahead of use
// (pre-fetching), limited only by FIFO space.  This follows the paper's
// description of the pre-sorted database, binary search and pre-fetch;
// the record format and the bus handling are this design's.
//
// Peptide broadcast: while waiting for the bus to fetch record k, the
// module watches the broadcast of DRAM reads; if another PE's read of
// record k goes by, it takes that copy and gives up its own request.
//
// Bus: each read is its own bus session (bus_request held from request to
// read data, then dropped for at least one cycle).  Results: first_idx and
// count of the candidates, `done` high once the last candidate is pushed.
module binary_search
  import xcorr_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MASS_W-1:0] prec_mass,
  input  logic [31:0]       tolerance,
  input  logic [31:0]       pep_base,
  input  logic [31:0]       num_peptides,
  // bus client
  output logic              bus_request,
  input  logic              bus_grant,
  output mem_req_t          m_req,
  input  mem_rsp_t          m_rsp,
  input  bcast_t            bcast,
  // to the peptide FIFO
  output logic              out_valid,
  input  logic              out_ready,
  output peptide_t          out_data,
  // status
  output logic              done,
  output logic [31:0]       first_idx,
  output logic [31:0]       count,
  output logic              snoop_take   // a record was taken from the broadcast
);
  typedef enum logic [3:0] {
    S_IDLE, S_BS_REQ, S_BS_CMD, S_BS_DATA, S_BS_EVAL,
    S_PF_WAIT, S_PF_REQ, S_PF_CMD, S_PF_DATA, S_PF_EVAL, S_DONE
  } state_t;

  state_t            state;
  logic [31:0]       lo, hi, idx;
  logic [32:0]       lower, upper;
  peptide_t          rec;
  logic [31:0]       mid, addr;
  logic              snoop_hit;
  peptide_t          rd_pep, bc_pep;

  assign rd_pep = m_rsp.readdata[PEP_W-1:0];
  assign bc_pep = bcast.data[PEP_W-1:0];

  assign mid       = lo + ((hi - lo) >> 1);
  assign addr      = pep_base + ((state inside {S_BS_REQ, S_BS_CMD}) ? mid : idx);
  assign snoop_hit = bcast.valid && bcast.address == pep_base + idx;
  assign snoop_take = (state == S_PF_REQ) && snoop_hit;

  assign bus_request = state inside {S_BS_REQ, S_BS_CMD, S_BS_DATA, S_PF_CMD, S_PF_DATA}
                       || (state == S_PF_REQ && !snoop_hit);
  always_comb begin
    m_req         = '0;
    m_req.read    = state inside {S_BS_CMD, S_PF_CMD};
    m_req.address = addr;
  end

  assign out_valid = (state == S_PF_EVAL) && ({1'b0, rec.mass} <= upper);
  assign out_data  = rec;
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      lo        <= '0;
      hi        <= '0;
      idx       <= '0;
      lower     <= '0;
      upper     <= '0;
      rec       <= '0;
      first_idx <= '0;
      count     <= '0;
    end else begin
      if (start) begin
        lo    <= '0;
        hi    <= num_peptides;
        lower <= (prec_mass > tolerance) ? {1'b0, prec_mass - tolerance} : '0;
        upper <= {1'b0, prec_mass} + {1'b0, tolerance};
        count <= '0;
        state <= S_BS_EVAL;
      end else begin
        case (state)
          S_BS_REQ:  if (bus_grant) state <= S_BS_CMD;
          S_BS_CMD:  if (!m_rsp.waitrequest) state <= S_BS_DATA;
          S_BS_DATA: if (m_rsp.readdatavalid) begin
            if ({1'b0, rd_pep.mass} < lower) lo <= mid + 1'b1;
            else                              hi <= mid;
            state <= S_BS_EVAL;
          end
          S_BS_EVAL: begin                    // bus released for a cycle
            if (lo < hi) state <= S_BS_REQ;
            else begin
              idx       <= lo;
              first_idx <= lo;
              state     <= S_PF_WAIT;
            end
          end
          S_PF_WAIT: begin
            if (idx >= num_peptides) state <= S_DONE;
            else if (out_ready)      state <= S_PF_REQ;  // FIFO has room
          end
          S_PF_REQ: begin
            if (snoop_hit) begin
              rec   <= bc_pep;
              state <= S_PF_EVAL;
            end else if (bus_grant) state <= S_PF_CMD;
          end
          S_PF_CMD:  if (!m_rsp.waitrequest) state <= S_PF_DATA;
          S_PF_DATA: if (m_rsp.readdatavalid) begin
            rec   <= rd_pep;
            state <= S_PF_EVAL;
          end
          S_PF_EVAL: begin
            if ({1'b0, rec.mass} > upper) state <= S_DONE;
            else begin
              count <= count + 1'b1;
              idx   <= idx + 1'b1;
              state <= S_PF_WAIT;
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_push_room: assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> out_ready);
endmodule
