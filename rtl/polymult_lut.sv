// polymult_lut: the precomputed look-up table that drives the packed
// polynomial evaluation.
//
// The sequence of terms and of randomness addresses depends only on the
// exponent matrix, never on the data, so it is a ROM filled at elaboration
// (see polymult_pkg for the expansion and the address rule). Entry t holds:
//   smask - the subset S whose share <r_S> the term multiplies,
//   tmask - A_i \ S, the public factors t_j of the term,
//   pub   - S is empty: the public term, which only party 1 adds,
//   addr  - where <r_S> sits in the prefetch buffer (shared by every row
//           that needs the same subset, the paper's randomness reuse).
// The paper gives the LUT's purpose and the reuse rule; the entry format
// and the address rule are this design's.
//
// Interface: combinational. base selects entries base .. base+LC-1 for the
// LC local-computation units; an index past the last term reads valid = 0.
module polymult_lut
  import polymult_pkg::*;
#(
  parameter int unsigned M   = 1,
  parameter int unsigned N   = 8,
  parameter exp_mat_t    EXP = product_matrix(8),
  parameter int unsigned LC  = 4,
  localparam int unsigned T  = num_terms(EXP, M, N),
  localparam int unsigned NR = num_rand(EXP, M, N),
  localparam int unsigned TW = $clog2(T + LC + 1),
  localparam int unsigned AW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic [TW-1:0]          base,
  output logic [LC-1:0]          valid,
  output logic [LC-1:0]          pub,
  output logic [LC-1:0][N-1:0]   smask,
  output logic [LC-1:0][N-1:0]   tmask,
  output logic [LC-1:0][AW-1:0]  addr
);

  typedef struct packed {
    logic          pub;
    logic [N-1:0]  smask;
    logic [N-1:0]  tmask;
    logic [AW-1:0] addr;
  } entry_t;

  function automatic entry_t make_entry(input int tix);
    entry_t e;
    vmask_t s, a;
    term_t  tt;
    tt = term_of(EXP, M, N, tix);
    s  = tt.s;
    a  = tt.a;
    e.pub   = (s == '0);
    e.smask = s[N-1:0];
    e.tmask = a[N-1:0] & ~s[N-1:0];
    e.addr  = (s == '0) ? '0 : AW'(rand_addr(EXP, M, N, s));
    return e;
  endfunction

  entry_t rom [T];
  for (genvar t = 0; t < T; t++) begin : g_rom
    localparam entry_t ENTRY = make_entry(t);
    assign rom[t] = ENTRY;
  end

  always_comb begin
    for (int l = 0; l < LC; l++) begin
      int unsigned idx;
      idx = int'(base) + l;
      valid[l] = (idx < T);
      if (idx < T) begin
        pub[l]   = rom[idx].pub;
        smask[l] = rom[idx].smask;
        tmask[l] = rom[idx].tmask;
        addr[l]  = rom[idx].addr;
      end else begin
        pub[l]   = 1'b0;
        smask[l] = '0;
        tmask[l] = '0;
        addr[l]  = '0;
      end
    end
  end

endmodule
