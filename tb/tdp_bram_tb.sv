// tdp_bram_tb -- self-checking test of the dual-port block RAM.
//
// Fills the memory through port A with random words, reads it back through
// port B (and the reverse), checks the one-cycle read latency, the
// read-first behaviour and that port A wins a same-address write collision.
// A reference array in the testbench holds the expected contents.
module tdp_bram_tb;
  localparam int unsigned W = 32, D = 64, AW = $clog2(D);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [W-1:0]  a_wdata, b_wdata, a_rdata, b_rdata;
  logic [W-1:0]  ref_mem [D];
  int checks = 0, failures = 0;

  tdp_bram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input string what, input logic [W-1:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0;
    a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    @(negedge clk);
    // fill through A
    for (int i = 0; i < D; i++) begin
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = $urandom; ref_mem[i] = a_wdata;
      @(negedge clk);
    end
    a_en = 0; a_we = 0;
    // read through B, one-cycle latency
    for (int i = 0; i < D; i++) begin
      b_en = 1; b_addr = AW'(i);
      @(negedge clk);
      check("B read", b_rdata, ref_mem[i]);
    end
    // overwrite the upper half through B, read-first on B
    for (int i = D/2; i < D; i++) begin
      b_en = 1; b_we = 1; b_addr = AW'(i); b_wdata = $urandom;
      @(negedge clk);
      check("B read-first", b_rdata, ref_mem[i]);
      ref_mem[i] = b_wdata;
    end
    b_en = 0; b_we = 0;
    // read all through A
    for (int i = 0; i < D; i++) begin
      a_en = 1; a_addr = AW'(i);
      @(negedge clk);
      check("A read", a_rdata, ref_mem[i]);
    end
    // disabled port holds its output
    a_en = 0; a_addr = 0;
    @(negedge clk);
    check("A hold", a_rdata, ref_mem[D-1]);
    // collision: both write address 5
    a_en = 1; a_we = 1; a_addr = 5; a_wdata = 32'hAAAA_0005;
    b_en = 1; b_we = 1; b_addr = 5; b_wdata = 32'hBBBB_0005;
    @(negedge clk);
    a_we = 0; b_en = 0; b_we = 0;
    @(negedge clk);
    check("collision A wins", a_rdata, 32'hAAAA_0005);
    a_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
