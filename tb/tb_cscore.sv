// tb_cscore: end-to-end, full-size testbench of the CS compressor.
//
// The compressor runs at its default parameters (N = 512 samples,
// M = 256 measurements, 16-bit samples) over PKTS = 20 packets, like the
// 20-packet evaluation run. Packets are synthetic EEG-like traces (sum of
// sinusoids at a 256 Hz sampling rate plus noise), except packets 3, 4 and 5,
// which are full-scale positive, full-scale negative and uniformly random;
// a 21st, all-zero packet follows.
// The sample source waits a random 0..3 cycles between samples and holds
// x_valid until it is taken, so samples are also offered back to back.
//
// Checked: every measurement against y = Phi * x computed here with the
// matrix formula; the unload order, y_index and y_last; `done` exactly two
// cycles after the last sample (the compression latency); unload starting
// the cycle after the one following `done` and taking M consecutive cycles;
// the sample rate of at most one per two cycles; x_ready low during unload.
// The random power-up contents of U1 and a final all-zero packet show the
// clears: a packet is only right if U1 started it at zero. Mechanisms counted and required to occur:
// input stall (x_valid with x_ready low), back-to-back acceptance at the
// two-cycle rate, unload, clear after unload, clear after reset.
module tb_cscore;
  import cs_pkg::*;

  localparam int unsigned N    = N_DEFAULT;
  localparam int unsigned M    = M_DEFAULT;
  localparam int unsigned XW   = XW_DEFAULT;
  localparam int unsigned YW   = XW + $clog2(N);
  localparam int unsigned PW   = $clog2(M);
  localparam int          PKTS = 20;

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic                 x_valid, x_ready;
  logic signed [XW-1:0] x_data;
  logic                 y_valid, y_last, done;
  logic [PW-1:0]        y_index;
  logic signed [YW-1:0] y_data;

  int checks = 0;
  int failures = 0;

  // mechanism counters
  int f_before;
  int n_stall = 0, n_b2b = 0, n_unload = 0, n_clear_unload = 0, n_clear_reset = 0;

  always #5 clk = ~clk;

  cscore dut (
    .clk(clk), .rst_n(rst_n),
    .x_valid(x_valid), .x_ready(x_ready), .x_data(x_data),
    .y_valid(y_valid), .y_index(y_index), .y_data(y_data), .y_last(y_last),
    .done(done)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------- packet data --
  logic signed [XW-1:0] pkt [N];
  longint               y_ref [M];

  function automatic logic signed [XW-1:0] sat16(input real v);
    if (v > 32767.0) return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return XW'($rtoi(v));
  endfunction

  task automatic make_packet(input int p);
    real t, v;
    for (int unsigned i = 0; i < N; i++) begin
      if (p == 3) begin
        pkt[i] = 16'sd32767;
      end else if (p == 4) begin
        pkt[i] = -16'sd32768;
      end else if (p == 5) begin
        pkt[i] = XW'($urandom);
      end else begin
        t = real'(p * N + i) / 256.0;
        v = 9000.0 * $sin(2.0 * 3.14159265 * 10.0 * t)
          + 4000.0 * $sin(2.0 * 3.14159265 * 3.0 * t + 0.5 * p)
          + 1500.0 * $sin(2.0 * 3.14159265 * 37.0 * t)
          + real'($urandom_range(0, 2000)) - 1000.0;
        pkt[i] = sat16(v);
      end
    end
    for (int unsigned r = 0; r < M; r++) y_ref[r] = 0;
    for (int unsigned i = 0; i < N; i++) begin
      y_ref[loc_p1(i, M)] += longint'(pkt[i]);
      y_ref[loc_p2(i, M)] += longint'(pkt[i]);
    end
  endtask

  // ---------------------------------------------------------- cycle log --
  longint cyc = 0;
  longint last_accept = -10, done_cyc = -1, first_y = -1, last_y = -1;
  int     y_cnt = 0;
  int     exp_idx = 0;
  bit     in_unload = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (x_valid && !x_ready) n_stall++;
      if (x_valid && x_ready) begin
        check(cyc - last_accept >= 2, $sformatf("samples accepted %0d cycles apart", cyc - last_accept));
        if (cyc - last_accept == 2) n_b2b++;
        last_accept = cyc;
      end
      if (done) begin
        check(cyc - last_accept == 2, $sformatf("done %0d cycles after last sample", cyc - last_accept));
        done_cyc = cyc;
        in_unload = 1;
      end
      if (in_unload) check(!x_ready, "x_ready high during unload");
      if (y_valid) begin
        if (y_cnt == 0) begin
          first_y = cyc;
          check(cyc - done_cyc == 2, $sformatf("unload began %0d cycles after done", cyc - done_cyc));
        end
        check(int'(y_index) == exp_idx, $sformatf("y_index %0d expected %0d", y_index, exp_idx));
        check(longint'(y_data) == y_ref[exp_idx],
              $sformatf("y[%0d] = %0d expected %0d", exp_idx, y_data, y_ref[exp_idx]));
        check(y_last == (exp_idx == int'(M) - 1), "y_last");
        exp_idx++;
        y_cnt++;
        if (y_last) begin
          last_y = cyc;
          check(y_cnt == int'(M), $sformatf("%0d words unloaded", y_cnt));
          check(last_y - first_y == longint'(M) - 1, "unload not in consecutive cycles");
          n_unload++;
          in_unload = 0;
        end
      end
    end
  end

  // ---------------------------------------------------------- stimulus --
  task automatic send_packet();
    for (int unsigned i = 0; i < N; i++) begin
      repeat ($urandom_range(0, 3)) @(negedge clk);
      x_valid = 1'b1;
      x_data  = pkt[i];
      do @(posedge clk); while (!x_ready);
      @(negedge clk);
      x_valid = 1'b0;
      x_data  = XW'($urandom);
    end
  endtask


  initial begin
    rst_n   = 1'b0;
    x_valid = 1'b0;
    x_data  = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // clear after reset: x_ready stays low until U1 is zero
    @(negedge clk);
    check(!x_ready, "x_ready high while clearing after reset");
    while (!x_ready) @(negedge clk);
    for (int p = 0; p <= PKTS; p++) begin
      // the last packet is all zero: its measurements must all be zero,
      // which shows that the preceding unload cleared U1
      if (p == PKTS) begin
        for (int unsigned i = 0; i < N; i++) pkt[i] = '0;
        for (int unsigned r = 0; r < M; r++) y_ref[r] = 0;
      end else begin
        make_packet(p);
      end
      f_before = failures;
      y_cnt   = 0;
      exp_idx = 0;
      send_packet();
      while (!(y_valid && y_last)) @(negedge clk);
      @(negedge clk);
      check(x_ready, "x_ready low after unload");
      // a packet measured correctly shows that U1 started it at zero:
      // cleared after reset (first packet) or after the previous unload
      if (failures == f_before) begin
        if (p == 0) n_clear_reset++;
        else n_clear_unload++;
      end
    end
    check(n_unload == PKTS + 1, $sformatf("%0d unloads for %0d packets", n_unload, PKTS + 1));
    $display("mechanisms: stall=%0d back_to_back=%0d unload=%0d clear_after_unload=%0d clear_after_reset=%0d",
             n_stall, n_b2b, n_unload, n_clear_unload, n_clear_reset);
    check(n_stall > 0, "input stall never happened");
    check(n_b2b > 0, "back-to-back samples never happened");
    check(n_unload > 0, "unload never happened");
    check(n_clear_unload > 0, "clear after unload never happened");
    check(n_clear_reset > 0, "clear after reset never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((PKTS + 1) * (N * 6 + M + 10) + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
