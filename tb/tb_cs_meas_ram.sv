// tb_cs_meas_ram: self-checking testbench of the dual-port measurement RAM (U1).
//
// Random mixes of reads and writes on both ports (never one address written
// by both ports in one cycle) are compared every cycle with a behavioural
// model once the memory has been filled: registered read-first outputs,
// outputs held while a port is disabled, and writes visible to the next read
// from either port.
module tb_cs_meas_ram;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned W     = 25;
  localparam int unsigned AW    = 8;

  logic          clk = 1'b0;
  logic          en_a, we_a, en_b, we_b;
  logic [AW-1:0] addr_a, addr_b;
  logic [W-1:0]  di_a, di_b, do_a, do_b;
  logic [W-1:0]  model [DEPTH];
  logic [W-1:0]  exp_a, exp_b;
  bit            filling = 1'b0;
  int            checks = 0;
  int            failures = 0;

  always #5 clk = ~clk;

  cs_meas_ram #(.DEPTH(DEPTH), .W(W)) dut (
    .clk(clk),
    .en_a(en_a), .we_a(we_a), .addr_a(addr_a), .di_a(di_a), .do_a(do_a),
    .en_b(en_b), .we_b(we_b), .addr_b(addr_b), .di_b(di_b), .do_b(do_b)
  );

  task automatic drive_idle();
    en_a = 1'b0; we_a = 1'b0; addr_a = '0; di_a = '0;
    en_b = 1'b0; we_b = 1'b0; addr_b = '0; di_b = '0;
  endtask

  // apply the current inputs for one clock and update the model
  task automatic step();
    @(posedge clk);
    if (en_a) exp_a = model[addr_a];
    if (en_b) exp_b = model[addr_b];
    if (en_a && we_a) model[addr_a] = di_a;
    if (en_b && we_b) model[addr_b] = di_b;
    @(negedge clk);
    if (filling) return;
    checks++;
    if (do_a !== exp_a || do_b !== exp_b) begin
      failures++;
      $display("FAIL: do_a=%h exp %h, do_b=%h exp %h", do_a, exp_a, do_b, exp_b);
    end
  endtask

  initial begin
    drive_idle();
    @(negedge clk);
    // fill (block RAM powers up with unknown contents, so the read-first
    // outputs of the fill writes are not checked)
    filling = 1'b1;
    // port a writes the even, port b the odd addresses
    for (int unsigned k = 0; k < DEPTH; k += 2) begin
      en_a = 1'b1; we_a = 1'b1; addr_a = AW'(k);     di_a = W'($urandom);
      en_b = 1'b1; we_b = 1'b1; addr_b = AW'(k + 1); di_b = W'($urandom);
      step();
    end
    // one read on each port puts known words on both outputs
    en_a = 1'b1; we_a = 1'b0; addr_a = '0;
    en_b = 1'b1; we_b = 1'b0; addr_b = AW'(1);
    step();
    filling = 1'b0;
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      en_a   = ($urandom_range(0, 3) != 0);
      en_b   = ($urandom_range(0, 3) != 0);
      we_a   = 1'($urandom_range(0, 1));
      we_b   = 1'($urandom_range(0, 1));
      addr_a = AW'($urandom_range(0, 15));   // small range: many collisions
      addr_b = AW'($urandom_range(0, 15));
      di_a   = W'($urandom);
      di_b   = W'($urandom);
      if (en_a && we_a && en_b && we_b && addr_a == addr_b) we_b = 1'b0;
      step();
    end
    // read back everything
    for (int unsigned k = 0; k < DEPTH; k += 2) begin
      en_a = 1'b1; we_a = 1'b0; addr_a = AW'(k);
      en_b = 1'b1; we_b = 1'b0; addr_b = AW'(k + 1);
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
