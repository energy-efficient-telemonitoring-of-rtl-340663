// tb_cs_loc_rom: self-checking testbench of the location ROM (U0).
//
// Two instances are read at every address: the default 512 x 256 matrix
// and a 512 x 13 one (M not a power of two). Every word must lie in
// 0 .. M-1 with p1 != p2 and equal the package formula; seven words of each
// are also compared with values worked out by hand from the hash, and the
// one-cycle read latency and the hold with en = 0 are checked.
module tb_cs_loc_rom;
  import cs_pkg::*;

  localparam int unsigned N   = 512;
  localparam int unsigned M0  = 256;
  localparam int unsigned M1  = 13;
  localparam int unsigned AW  = 9;
  localparam int unsigned PW0 = 8;
  localparam int unsigned PW1 = 4;

  logic           clk = 1'b0;
  logic           en;
  logic [AW-1:0]  addr;
  logic [PW0-1:0] a1, a2;
  logic [PW1-1:0] b1, b2;
  int             checks = 0;
  int             failures = 0;

  always #5 clk = ~clk;

  cs_loc_rom #(.N(N), .M(M0)) dut0 (.clk(clk), .en(en), .addr(addr), .p1(a1), .p2(a2));
  cs_loc_rom #(.N(N), .M(M1)) dut1 (.clk(clk), .en(en), .addr(addr), .p1(b1), .p2(b2));

  // hand-computed reference words {i, p1(M=256), p2(M=256), p1(M=13), p2(M=13)}
  int unsigned ref_tab [7][5] = '{
    '{  0,  11,  62, 4, 0},
    '{  1, 194, 158, 4, 5},
    '{  2,  48, 231, 0, 3},
    '{  3, 102, 185, 6, 4},
    '{100, 240, 195, 0, 1},
    '{255, 120,  86, 5, 8},
    '{511,  27, 141, 6, 2}
  };

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    en   = 1'b0;
    addr = '0;
    @(negedge clk);
    // sweep every address
    for (int unsigned i = 0; i < N; i++) begin
      en   = 1'b1;
      addr = AW'(i);
      @(negedge clk);
      check(a1 != a2 && b1 != b2, $sformatf("rows equal at i=%0d", i));
      check(int'(b1) < M1 && int'(b2) < M1, $sformatf("row out of range at i=%0d", i));
      check(int'(a1) == int'(loc_p1(i, M0)) && int'(a2) == int'(loc_p2(i, M0)),
            $sformatf("M=256 word at i=%0d is %0d,%0d", i, a1, a2));
      check(int'(b1) == int'(loc_p1(i, M1)) && int'(b2) == int'(loc_p2(i, M1)),
            $sformatf("M=13 word at i=%0d is %0d,%0d", i, b1, b2));
    end
    // hand-computed words
    for (int k = 0; k < 7; k++) begin
      addr = AW'(ref_tab[k][0]);
      @(negedge clk);
      check(int'(a1) == int'(ref_tab[k][1]) && int'(a2) == int'(ref_tab[k][2]),
            $sformatf("i=%0d M=256 got %0d,%0d", ref_tab[k][0], a1, a2));
      check(int'(b1) == int'(ref_tab[k][3]) && int'(b2) == int'(ref_tab[k][4]),
            $sformatf("i=%0d M=13 got %0d,%0d", ref_tab[k][0], b1, b2));
    end
    // en = 0 keeps the last word
    en   = 1'b0;
    addr = AW'(0);
    @(negedge clk);
    check(a1 == 8'd27 && a2 == 8'd141, "output not held with en = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
