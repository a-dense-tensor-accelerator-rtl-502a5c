// tb_vm_sram: self-checking test of vm_sram.
// Writes random words, reads them back against a shadow array, checks that the
// read register holds while re=0 and that a read of a word written in the same
// cycle returns the old contents.
module tb_vm_sram;
  localparam int DEPTH = 20, WIDTH = 24;
  logic clk = 0, rst_n = 0;
  logic re, we;
  logic [4:0] raddr, waddr;
  logic [WIDTH-1:0] rdata, wdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  vm_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = WIDTH'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    // read back
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1; raddr = 5'(a);
      @(negedge clk); re = 0; raddr = 5'((a + 1) % DEPTH);
      check(shadow[a], "readback");
      // hold with re=0 while the address moves on
      @(negedge clk);
      check(shadow[a], "hold");
    end
    // read-before-write on the same word
    for (int i = 0; i < 30; i++) begin
      int a;
      logic [WIDTH-1:0] old;
      a = $urandom_range(DEPTH - 1);
      old = shadow[a];
      @(negedge clk);
      re = 1; raddr = 5'(a); we = 1; waddr = 5'(a); wdata = WIDTH'($urandom); shadow[a] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      check(old, "read-before-write");
      @(negedge clk); re = 1;
      @(negedge clk); re = 0;
      check(shadow[a], "after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
