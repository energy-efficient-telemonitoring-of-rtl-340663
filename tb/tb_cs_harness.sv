// tb_cs_harness: reusable stimulus and checker for one cscore instance.
//
// Instantiates the compressor with the given N and M, resets it, sends
// PKTS packets of synthetic EEG-like samples (sinusoids plus noise, random
// 0..3 cycle gaps between samples) and checks every unloaded measurement
// against y = Phi * x computed with the matrix formula, the two-cycle
// compression latency (`done` two cycles after the last sample) and the
// number of words per unload. Results leave through the ports so that one
// testbench can run several sizes side by side.
module tb_cs_harness
  import cs_pkg::*;
#(
  parameter int unsigned N    = 512,
  parameter int unsigned M    = 256,
  parameter int          PKTS = 4,
  parameter int          SEED = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned XW = 16;
  localparam int unsigned YW = XW + $clog2(N);
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;

  logic                 rst_n;
  logic                 x_valid, x_ready;
  logic signed [XW-1:0] x_data;
  logic                 y_valid, y_last, done;
  logic [PW-1:0]        y_index;
  logic signed [YW-1:0] y_data;

  cscore #(.N(N), .M(M)) dut (
    .clk(clk), .rst_n(rst_n),
    .x_valid(x_valid), .x_ready(x_ready), .x_data(x_data),
    .y_valid(y_valid), .y_index(y_index), .y_data(y_data), .y_last(y_last),
    .done(done)
  );

  logic signed [XW-1:0] pkt [N];
  longint               y_ref [M];
  longint               cyc = 0, last_accept = -10;
  int                   exp_idx = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL (N=%0d M=%0d): %s", N, M, what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (x_valid && x_ready) last_accept = cyc;
      if (done) check(cyc - last_accept == 2, "done not two cycles after the last sample");
      if (y_valid) begin
        check(int'(y_index) == exp_idx, "y_index order");
        check(longint'(y_data) == y_ref[exp_idx],
              $sformatf("y[%0d] = %0d expected %0d", exp_idx, y_data, y_ref[exp_idx]));
        check(y_last == (exp_idx == int'(M) - 1), "y_last");
        exp_idx++;
      end
    end
  end

  initial begin
    real t, v;
    checks   = 0;
    failures = 0;
    finished = 1'b0;
    rst_n    = 1'b0;
    x_valid  = 1'b0;
    x_data   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!x_ready) @(negedge clk);
    for (int p = 0; p < PKTS; p++) begin
      for (int unsigned i = 0; i < N; i++) begin
        t = real'(p * N + i) / 256.0;
        v = 8000.0 * $sin(2.0 * 3.14159265 * (4.0 + SEED) * t)
          + 3000.0 * $sin(2.0 * 3.14159265 * 23.0 * t + SEED)
          + real'($urandom_range(0, 1000)) - 500.0;
        pkt[i] = XW'($rtoi(v));
      end
      for (int unsigned r = 0; r < M; r++) y_ref[r] = 0;
      for (int unsigned i = 0; i < N; i++) begin
        y_ref[loc_p1(i, M)] += longint'(pkt[i]);
        y_ref[loc_p2(i, M)] += longint'(pkt[i]);
      end
      exp_idx = 0;
      for (int unsigned i = 0; i < N; i++) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        x_valid = 1'b1;
        x_data  = pkt[i];
        do @(posedge clk); while (!x_ready);
        @(negedge clk);
        x_valid = 1'b0;
      end
      while (!(y_valid && y_last)) @(negedge clk);
      @(negedge clk);
      check(exp_idx == int'(M), $sformatf("%0d words unloaded", exp_idx));
    end
    finished = 1'b1;
  end
endmodule
