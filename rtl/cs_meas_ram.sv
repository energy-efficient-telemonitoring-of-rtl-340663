// cs_meas_ram: measurement memory (block U1) of the CS compressor.
//
// A synchronous true dual-port RAM of DEPTH words of W bits that holds the
// compressed measurements y of the packet being compressed. Ports a and b
// each have an enable, a write enable, an address, a data input (d_i) and a
// registered data output (d_o). Both ports are read-first: a read returns
// the word as it was before a write in the same cycle. Read data appear
// after the rising edge that samples the address and hold until the next
// enabled access of that port.
//
// The two ports must not write the same address in the same cycle; an
// assertion checks this. The controller never does so because the two ones
// of a column of the sensing matrix lie in different rows. The memory has no
// reset (as a block RAM); the controller clears it.
module cs_meas_ram #(
  parameter int unsigned DEPTH = 256,                       // words (M)
  parameter int unsigned W     = 25,                        // word width
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  // port a
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [W-1:0]  di_a,
  output logic [W-1:0]  do_a,
  // port b
  input  logic          en_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [W-1:0]  di_b,
  output logic [W-1:0]  do_b
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a) begin
      do_a <= mem[addr_a];
      if (we_a) mem[addr_a] <= di_a;
    end
    if (en_b) begin
      do_b <= mem[addr_b];
      if (we_b) mem[addr_b] <= di_b;
    end
  end

  // Both ports writing one word in the same cycle is not allowed.
  always_ff @(posedge clk) begin
    if (en_a && we_a && en_b && we_b) begin
      assert (addr_a != addr_b)
        else $error("cs_meas_ram: both ports write address %0d", addr_a);
    end
  end

endmodule
