// svm_ram: simple dual-port memory holding one of the classifier's arrays.
//
// The IP keeps its operands in on-chip arrays: array_SVs (all support-vector
// features, row by row), array_ay (b at index 0, then alpha*y of each SV) and
// array_test (the test instance). Synthesis tools of the kind the design was
// made with map such arrays to dual-port block RAM; here one port writes (the
// stream loader) and the other reads (the compute core).
//
// Timing: a write on port A takes effect at the clock edge; a read on port B
// returns the word at the address presented one clock earlier (registered
// output, like a block RAM). Reading and writing the same address in one
// cycle returns the old word. The contents are not reset; the loader writes
// every word before the core reads it.
module svm_ram #(
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned WIDTH  = 32,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  // write port
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  // read port
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
