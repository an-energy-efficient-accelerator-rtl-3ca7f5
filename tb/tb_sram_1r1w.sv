// tb_sram_1r1w: checks the partial-result SRAM (448 x 32): random writes and
// reads against a model array, one-cycle read latency, old data on a read
// of the address written in the same cycle, and rdata holding while no read
// is issued.
module tb_sram_1r1w;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int DEPTH = 448;
  logic        we, re;
  logic [8:0]  waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  initial begin
    logic [31:0] exp;
    logic        pend;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    pend = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("FAIL: read got %h expected %h", rdata, exp);
        end
      end
      we = ($urandom % 2) == 0;
      re = ($urandom % 3) != 0;
      waddr = 9'($urandom % DEPTH);
      raddr = (($urandom % 4) == 0) ? waddr : 9'($urandom % DEPTH);
      wdata = $urandom;
      if (re) exp = model[raddr];   // old data, even on a collision
      pend = pend || re;           // rdata holds when re is low
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
