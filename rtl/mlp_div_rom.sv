// mlp_div_rom: fast-division ROM for the MLP ratio m/N.
//
// The sampled MLP ratio of a page is m/N, where m is the page's outstanding
// request count and N the owning application's outstanding count. Both are
// bounded by the last-level-cache MSHR size (32), so the quotient is read from
// a 32 x 32 table of precomputed 10-bit results instead of being divided.
// The table holds floor(m * 2^9 / N) for m, N in 1..32 (unsigned 1.9 fixed
// point, 512 = 1.0); it is computed by a constant function at elaboration, so
// no data file is needed. m = 0 or N = 0 gives 0 without a lookup, and an N
// above 32 is clamped to 32 (a choice of this design; N cannot exceed the MSHR
// size in the configuration described).
//
// Purely combinational: q is valid in the same cycle as m and n.
module mlp_div_rom
  import ubm_pkg::*;
#(
  parameter int unsigned DEPTH = MSHR      // table is DEPTH x DEPTH
) (
  input  logic [OUTS_W-1:0] m,             // page outstanding requests
  input  logic [OUTS_W-1:0] n,             // application outstanding requests
  output logic [Q_W-1:0]    q              // floor(m * 512 / n)
);

  localparam int unsigned IDX_W = $clog2(DEPTH);
  typedef logic [DEPTH*DEPTH-1:0][Q_W-1:0] rom_t;

  function automatic rom_t build_rom();
    rom_t r;
    for (int unsigned mi = 0; mi < DEPTH; mi++)
      for (int unsigned ni = 0; ni < DEPTH; ni++) begin
        int unsigned v;
        v = ((mi + 1) << Q_FRAC) / (ni + 1);
        if (v > (1 << Q_W) - 1) v = (1 << Q_W) - 1;
        r[mi*DEPTH + ni] = Q_W'(v);
      end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  logic [OUTS_W-1:0] m_c, n_c;
  logic [IDX_W-1:0]  mi, ni;

  always_comb begin
    m_c = (m > OUTS_W'(DEPTH)) ? OUTS_W'(DEPTH) : m;
    n_c = (n > OUTS_W'(DEPTH)) ? OUTS_W'(DEPTH) : n;
    mi  = IDX_W'(m_c - 1'b1);
    ni  = IDX_W'(n_c - 1'b1);
    if (m_c == '0 || n_c == '0) q = '0;
    else                        q = ROM[{mi, ni}];
  end

endmodule
