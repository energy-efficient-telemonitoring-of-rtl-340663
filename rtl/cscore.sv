// cscore: on-the-fly compressed-sensing (CS) compressor, the top of the design.
//
// It computes the M compressed measurements y = Phi * x of a packet of N
// samples, where the sensing matrix Phi is sparse and binary with two ones
// per column. Column i only adds sample x_i to the two rows p_i^1 and p_i^2
// where its ones are, so y is accumulated one sample at a time, without
// multipliers and without storing the packet:
//   y[p_i^1] += x_i ;  y[p_i^2] += x_i
// The locations come from the ROM U0 (cs_loc_rom), y lives in the dual-port
// RAM U1 (cs_meas_ram), one port per location, and two adders form the new
// values. After the N-th sample the M measurements are streamed out of
// port b, and port a writes zero behind the read so U1 is clean for the next
// packet.
//
// Sample timing (cycle t = the cycle a sample is accepted, x_valid & x_ready):
//   t    : U0 is read at the sample index i
//   t+1  : U1 is read at p_i^1 (port a) and p_i^2 (port b)     (R/W_n = 1)
//   t+2  : x_i is added to both words and written back          (R/W_n = 0)
// x_ready is low in cycle t+1 so that the next read of U1 (t+3 at the
// earliest) sees the completed write. A sample can thus be taken every
// second clock, far faster than physiological sampling rates. `done` is
// high in the cycle of the last write-back, two cycles after the last
// sample of a packet is accepted: the compression latency of two cycles.
//
// Unload: beginning the cycle after `done`, U1 is read at 0 .. M-1 on
// port b, one word per cycle; y_valid/y_index/y_data present each word one
// cycle after its read, y_last marks index M-1, and port a zeroes that same
// word in that cycle. Samples are not accepted during the M + 1 unload
// cycles (x_ready = 0); the source holds x_valid and x_data until taken.
// After reset the same sequence runs without output to clear U1 (M + 1
// cycles), since block RAM contents are not reset.
//
// From the paper: the U0/U1 structure, the two adders, the read/accumulate/
// write-back of the two words, unload through port b, clearing after unload,
// 16-bit samples, N = 512 and CR = 0.5 (M = 256). This design's own choices:
// the valid/ready sample handshake, the one-cycle gap between samples, the
// output stream format, the measurement width YW = XW + log2(N) (no
// overflow for any Phi), the clear after reset and the matrix formula in
// cs_pkg.
module cscore
  import cs_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,                 // samples per packet
  parameter int unsigned M  = M_DEFAULT,                 // measurements per packet
  parameter int unsigned XW = XW_DEFAULT,                // sample width
  parameter int unsigned YW = XW + $clog2(N),            // measurement width
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1,   // sample index width
  parameter int unsigned PW = (M > 1) ? $clog2(M) : 1    // measurement index width
) (
  input  logic                 clk,
  input  logic                 rst_n,     // synchronous, active low
  // sample input (two's complement)
  input  logic                 x_valid,
  output logic                 x_ready,
  input  logic signed [XW-1:0] x_data,
  // measurement output stream
  output logic                 y_valid,
  output logic [PW-1:0]        y_index,
  output logic signed [YW-1:0] y_data,
  output logic                 y_last,
  // last write-back of a packet
  output logic                 done
);

  cs_state_e st;

  // stage b: U1 read; stage c: add and write back
  logic                 v_b, v_c, last_b, last_c;
  logic signed [XW-1:0] x_b, x_c;
  logic [PW-1:0]        p1_c, p2_c;

  // ---------------------------------------------------------------- U0 --
  logic [AW-1:0] i_cnt;
  logic          x_fire;
  logic [PW-1:0] rom_p1, rom_p2;

  assign x_ready = (st == ST_ACC) && !v_b;
  assign x_fire  = x_valid && x_ready;

  cs_loc_rom #(.N(N), .M(M), .AW(AW), .PW(PW)) u0 (
    .clk  (clk),
    .en   (x_fire),
    .addr (i_cnt),
    .p1   (rom_p1),
    .p2   (rom_p2)
  );

  // ----------------------------------------------------- sample pipeline --
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_b    <= 1'b0;
      v_c    <= 1'b0;
      last_b <= 1'b0;
      last_c <= 1'b0;
      x_b    <= '0;
      x_c    <= '0;
      p1_c   <= '0;
      p2_c   <= '0;
    end else begin
      v_b <= x_fire;
      v_c <= v_b;
      if (x_fire) begin
        x_b    <= x_data;
        last_b <= (i_cnt == AW'(N - 1));
      end
      if (v_b) begin
        x_c    <= x_b;
        last_c <= last_b;
        p1_c   <= rom_p1;
        p2_c   <= rom_p2;
      end
    end
  end

  // ------------------------------------------------------ unload / clear --
  logic [PW-1:0] ul_k;      // next address to read
  logic          ul_all;    // all M addresses issued
  logic          ul_issue;  // read of ul_k this cycle
  logic          ul_v;      // word of ul_kq is on do_b this cycle
  logic [PW-1:0] ul_kq;

  assign ul_issue = ((st == ST_UNLOAD) || (st == ST_CLEAR)) && !ul_all;

  // ---------------------------------------------------------------- U1 --
  logic          en_a, we_a, en_b, we_b;
  logic [PW-1:0] addr_a, addr_b;
  logic [YW-1:0] di_a, di_b, do_a, do_b;
  logic          rw_n;      // shared read / not-write of the sample path

  assign rw_n = !v_c;

  always_comb begin
    en_a   = 1'b0;
    we_a   = 1'b0;
    addr_a = p1_c;
    di_a   = do_a + YW'(x_c);
    en_b   = 1'b0;
    we_b   = 1'b0;
    addr_b = p2_c;
    di_b   = do_b + YW'(x_c);
    if (v_b || v_c) begin
      // sample path: read (stage b) or write back (stage c)
      en_a   = 1'b1;
      en_b   = 1'b1;
      we_a   = !rw_n;
      we_b   = !rw_n;
      addr_a = v_c ? p1_c : rom_p1;
      addr_b = v_c ? p2_c : rom_p2;
    end else begin
      // unload: read port b, zero port a behind it
      if (ul_issue) begin
        en_b   = 1'b1;
        addr_b = ul_k;
      end
      if (ul_v) begin
        en_a   = 1'b1;
        we_a   = 1'b1;
        addr_a = ul_kq;
        di_a   = '0;
      end
    end
  end

  cs_meas_ram #(.DEPTH(M), .W(YW), .AW(PW)) u1 (
    .clk    (clk),
    .en_a   (en_a),
    .we_a   (we_a),
    .addr_a (addr_a),
    .di_a   (di_a),
    .do_a   (do_a),
    .en_b   (en_b),
    .we_b   (we_b),
    .addr_b (addr_b),
    .di_b   (di_b),
    .do_b   (do_b)
  );

  // ---------------------------------------------------------- controller --
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= ST_CLEAR;
      i_cnt  <= '0;
      ul_k   <= '0;
      ul_all <= 1'b0;
      ul_v   <= 1'b0;
      ul_kq  <= '0;
    end else begin
      ul_v <= ul_issue;
      if (ul_issue) begin
        ul_kq <= ul_k;
        ul_k  <= ul_k + 1'b1;
        if (ul_k == PW'(M - 1)) ul_all <= 1'b1;
      end
      unique case (st)
        ST_ACC: begin
          if (x_fire) begin
            if (i_cnt == AW'(N - 1)) begin
              i_cnt <= '0;
              st    <= ST_DRAIN;
            end else begin
              i_cnt <= i_cnt + 1'b1;
            end
          end
        end
        ST_DRAIN: begin
          if (v_c && last_c) begin
            st     <= ST_UNLOAD;
            ul_k   <= '0;
            ul_all <= 1'b0;
          end
        end
        ST_UNLOAD, ST_CLEAR: begin
          if (ul_v && (ul_kq == PW'(M - 1))) begin
            st <= ST_ACC;
          end
        end
        default: st <= ST_CLEAR;
      endcase
    end
  end

  // -------------------------------------------------------------- outputs --
  assign done    = v_c && last_c;
  assign y_valid = ul_v && (st == ST_UNLOAD);
  assign y_index = ul_kq;
  assign y_data  = do_b;
  assign y_last  = y_valid && (ul_kq == PW'(M - 1));

  // ----------------------------------------------------------- assertions --
  // a sample waiting for x_ready must be held unchanged
  a_x_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (x_valid && !x_ready) |=> (x_valid && $stable(x_data)));
  // U1 serves one sample stage per cycle
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n) !(v_b && v_c));
  // the two ones of a column lie in different rows
  a_two_rows: assert property (@(posedge clk) disable iff (!rst_n)
    v_c |-> (p1_c != p2_c));

endmodule
