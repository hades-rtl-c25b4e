// tb_sram_8t_array: self-checking test of the 8T SRAM array model.
// Fills a 64-word array with random words through the write port, reads every
// word back through the read port and checks the one-cycle read latency, that
// rdata holds while re is low, and that a read of a word written in the same
// cycle returns the old contents. A scoreboard array is the reference.
module tb_sram_8t_array;
  localparam int unsigned WIDTH = 2;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we = 1'b0, re = 1'b0;
  logic [AW-1:0]    waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sram_8t_array #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [WIDTH-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = WIDTH'($urandom);
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    // read back, checking the one-cycle latency
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1'b1; raddr = AW'(a);
      @(negedge clk); re = 1'b0;
      check(rdata, ref_mem[a], $sformatf("read %0d", a));
      // holds while re is low
      @(negedge clk);
      check(rdata, ref_mem[a], $sformatf("hold %0d", a));
    end
    // read during write of the same word returns the old word
    for (int t = 0; t < 32; t++) begin
      int a;
      logic [WIDTH-1:0] nd;
      a  = $urandom_range(DEPTH-1);
      nd = ref_mem[a] + 1'b1;
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = nd;
      re = 1'b1; raddr = AW'(a);
      @(negedge clk);
      we = 1'b0; re = 1'b1;
      check(rdata, ref_mem[a], "read-during-write old data");
      ref_mem[a] = nd;
      @(negedge clk); re = 1'b0;
      check(rdata, nd, "new data after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
