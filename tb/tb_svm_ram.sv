// tb_svm_ram: self-checking test of the array memory.
// Fills a 100-word memory with random data, then reads it back in random
// order checking the one-cycle registered read, the hold of rdata when re is
// low, and that a read of the address being written returns the old word.
module tb_svm_ram;
  localparam int DEPTH = 100;
  logic        clk = 0;
  logic        we = 0, re = 0;
  logic [6:0]  waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  svm_ram #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] held;
    int a;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = $urandom;
      we = 1; waddr = 7'(i); wdata = model[i];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 300; i++) begin
      a = $urandom_range(DEPTH - 1);
      re = 1; raddr = 7'(a);
      @(negedge clk);
      expect_eq(rdata, model[a], "read");
      held = rdata;
      re = 0; raddr = 7'($urandom_range(DEPTH - 1));
      @(negedge clk);
      expect_eq(rdata, held, "hold");
    end
    // read-during-write returns the old word
    a = 17;
    re = 1; raddr = 7'(a); we = 1; waddr = 7'(a); wdata = ~model[a];
    @(negedge clk);
    expect_eq(rdata, model[a], "read during write");
    model[a] = ~model[a];
    we = 0;
    @(negedge clk);
    expect_eq(rdata, model[a], "read after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
