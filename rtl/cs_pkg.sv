// cs_pkg: constants and the sensing-matrix definition shared by the
// compressed-sensing (CS) compressor.
//
// The compressor computes y = Phi * x for one packet of N samples, where Phi
// is an M x N sparse binary matrix with exactly K = 2 ones in every column.
// The defaults are those of the hardware evaluation: packets of N = 512
// samples, 16-bit samples, compression ratio CR = (N - M) / N = 0.5, so
// M = 256 measurements.
//
// The positions of the ones are not published, only that the matrix is a
// sparse binary random matrix with two ones per column. This package
// therefore defines the matrix by a fixed integer hash of the column index
// (loc_hash), so that the location ROM can be computed at elaboration time
// for any N and M and a receiver can rebuild the same matrix from the same
// formula:
//   h     = hash(i)
//   p1(i) = h mod M
//   p2(i) = (p1(i) + 1 + ((h >> 16) mod (M - 1))) mod M
// which always gives two different rows p1 != p2 in 0 .. M-1 (M >= 2).
package cs_pkg;

  // Defaults of the evaluated configuration.
  localparam int unsigned N_DEFAULT  = 512;  // samples per packet
  localparam int unsigned M_DEFAULT  = 256;  // measurements, CR = 0.5
  localparam int unsigned XW_DEFAULT = 16;   // sample resolution in bits

  // 32-bit integer mixing function (multiply / xor-shift avalanche).
  function automatic logic [31:0] loc_hash(input logic [31:0] i);
    logic [31:0] h;
    h = i * 32'h9E37_79B1 + 32'h7F4A_7C15;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // First row index holding a one in column i.
  function automatic int unsigned loc_p1(input int unsigned i, input int unsigned m);
    logic [31:0] h;
    h = loc_hash(32'(i));
    return int'(h % 32'(m));
  endfunction

  // Second row index holding a one in column i; never equal to loc_p1.
  function automatic int unsigned loc_p2(input int unsigned i, input int unsigned m);
    logic [31:0] h;
    logic [31:0] p1;
    h  = loc_hash(32'(i));
    p1 = h % 32'(m);
    return int'((p1 + 32'd1 + ((h >> 16) % 32'(m - 1))) % 32'(m));
  endfunction

  // Phase of the compressor controller.
  typedef enum logic [1:0] {
    ST_ACC    = 2'd0,  // accepting and accumulating the samples of a packet
    ST_DRAIN  = 2'd1,  // last sample accepted, its write-back still pending
    ST_UNLOAD = 2'd2,  // streaming y out of U1 and zeroing it behind the read
    ST_CLEAR  = 2'd3   // zeroing U1 after reset, nothing is output
  } cs_state_e;

endpackage
