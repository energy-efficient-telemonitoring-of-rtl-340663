// cs_loc_rom: location ROM (block U0) of the CS compressor.
//
// For every sample index i of a packet it holds the two row indexes
// {p_i^1, p_i^2} of the ones in column i of the M x N sparse binary sensing
// matrix Phi. Storing only the locations, instead of the N x M bit matrix,
// is what keeps the sensing matrix small: N words of 2*log2(M) bits
// (512 x 16 bits at the defaults).
//
// The contents are computed at elaboration time from cs_pkg::loc_p1/loc_p2;
// the original matrix is not published, so this formula is this design's
// own choice. Read timing is synchronous, as in a block RAM: the address is
// taken at a rising edge with en = 1 and p1/p2 are valid after that edge and
// hold until the next enabled read.
module cs_loc_rom
  import cs_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,              // columns (samples per packet)
  parameter int unsigned M  = M_DEFAULT,              // rows (measurements), >= 2
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1, // sample index width
  parameter int unsigned PW = (M > 1) ? $clog2(M) : 1  // row index width
) (
  input  logic          clk,
  input  logic          en,    // read enable
  input  logic [AW-1:0] addr,  // sample index i, 0 .. N-1
  output logic [PW-1:0] p1,    // first row with a one in column i
  output logic [PW-1:0] p2     // second row with a one in column i
);

  typedef logic [2*PW-1:0] word_t;
  typedef word_t rom_t [N];

  function automatic rom_t build_rom();
    rom_t r;
    for (int unsigned i = 0; i < N; i++) begin
      r[i] = {PW'(loc_p1(i, M)), PW'(loc_p2(i, M))};
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  word_t q;

  always_ff @(posedge clk) begin
    if (en) q <= ROM[addr];
  end

  assign p1 = q[2*PW-1:PW];
  assign p2 = q[PW-1:0];

endmodule
