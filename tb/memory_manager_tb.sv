// memory_manager_tb -- self-checking test of the memory manager.
//
// A behavioural BRAM (one-cycle read latency) sits on the manager's memory
// port, and a behavioural processor model answers each interrupt by
// rewriting (top-down) or checking (bottom-up) the half just finished.
// The word stored at address a in its g-th refill is V(g, a), so the k-th
// word of the stream must be V(k / DEPTH, k % DEPTH) whatever the manager's
// internal timing. Checked: stream order across several laps of the ring,
// refilled data being picked up, interrupts once per half with the right
// half indicator, the address walk, the two-cycle refill rate of the read
// stream, the bottom-up write order, and restart from address 0.
module memory_manager_tb;
  import qcomm_pkg::*;

  localparam int unsigned D = 16, AW = $clog2(D);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, enable;
  dir_e dir;
  logic mem_en, mem_we;
  logic [AW-1:0] mem_addr;
  logic [WORD_W-1:0] mem_wdata, mem_rdata;
  logic [WORD_W-1:0] rd_data, wr_data;
  logic rd_valid, rd_ready, wr_valid;
  logic irq, irq_half;

  int checks = 0, failures = 0;

  memory_manager #(.DEPTH(D)) dut (.*);

  function automatic logic [WORD_W-1:0] V(int g, int a);
    return {16'(g) ^ 16'h3c5a, 16'(a) ^ 16'h0f00} ^ 32'h1234_0000;
  endfunction

  task automatic check(input string what, input logic [WORD_W-1:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  // behavioural BRAM and processor
  logic [WORD_W-1:0] mem [D];
  int gen [2];   // refill generation of each half
  int irq_cnt, irq_half_cnt [2];
  int exp_half;  // half the next interrupt must name
  logic [AW-1:0] last_addr;
  logic issued_last;  // last cycle issued the last address of a half

  always_ff @(posedge clk) begin
    if (mem_en) begin
      mem_rdata <= mem[mem_addr];
      if (mem_we) mem[mem_addr] <= mem_wdata;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // address walk and interrupt timing, checked every cycle
  always @(posedge clk) if (rst_n && enable) begin
    if (mem_en) begin
      check("address walk", WORD_W'(mem_addr), WORD_W'(last_addr));
      last_addr <= (mem_addr == AW'(D-1)) ? '0 : mem_addr + 1'b1;
    end
    check("irq one cycle after half end", WORD_W'(irq), WORD_W'(issued_last));
    issued_last <= mem_en && (mem_addr == AW'(D/2-1) || mem_addr == AW'(D-1));
    if (irq) begin
      check("irq half", WORD_W'(irq_half), WORD_W'(exp_half));
      irq_cnt++;
      irq_half_cnt[irq_half]++;
      exp_half = 1 - exp_half;
    end
  end

  task automatic restart(input dir_e d);
    @(negedge clk);
    enable = 0; dir = d;
    @(negedge clk);
    @(negedge clk);
    last_addr = '0; issued_last = 0; exp_half = 0;
    enable = 1;
  endtask

  int k, cyc, last_pop_cyc;
  initial begin
    rst_n = 0; enable = 0; dir = DIR_TOP_DOWN; rd_ready = 0; wr_valid = 0; wr_data = '0;
    irq_cnt = 0; irq_half_cnt = '{0, 0};
    for (int a = 0; a < D; a++) mem[a] = V(0, a);
    gen = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- top-down, random consumer, five laps with refills ----
    restart(DIR_TOP_DOWN);
    k = 0;
    while (k < 5 * D) begin
      @(negedge clk);
      // processor answers the interrupt of the previous edge
      if (irq) begin
        gen[irq_half]++;
        for (int a = 0; a < D/2; a++)
          mem[irq_half*D/2 + a] = V(gen[irq_half], irq_half*D/2 + a);
      end
      rd_ready = ($urandom_range(0, 2) != 0);
      if (rd_valid && rd_ready) begin
        check("read stream word", rd_data, V(k / D, k % D));
        k++;
      end
    end
    @(negedge clk); rd_ready = 0;
    checks++;
    if (irq_half_cnt[0] < 4 || irq_half_cnt[1] < 4) begin
      failures++; $display("FAIL too few interrupts %0d %0d", irq_half_cnt[0], irq_half_cnt[1]);
    end

    // ---- top-down rate: consumer always ready, one word per two cycles ----
    for (int a = 0; a < D; a++) mem[a] = V(0, a);
    gen = '{0, 0};
    restart(DIR_TOP_DOWN);
    rd_ready = 1;
    k = 0; cyc = 0; last_pop_cyc = -1;
    while (k < 2 * D) begin
      @(negedge clk);
      cyc++;
      if (irq) begin
        gen[irq_half]++;
        for (int a = 0; a < D/2; a++)
          mem[irq_half*D/2 + a] = V(gen[irq_half], irq_half*D/2 + a);
      end
      if (rd_valid) begin
        check("read stream word (full rate)", rd_data, V(k / D, k % D));
        if (last_pop_cyc >= 0) check("two cycles per word", 32'(cyc - last_pop_cyc), 32'd2);
        last_pop_cyc = cyc;
        k++;
      end
    end
    rd_ready = 0;

    // ---- bottom-up: random producer, three laps, check each drained half ----
    restart(DIR_BOTTOM_UP);
    k = 0;
    irq_cnt = 0;
    while (k < 3 * D || irq_cnt < 6) begin
      @(negedge clk);
      if (irq) begin
        for (int a = 0; a < D/2; a++)
          check("written half", mem[irq_half*D/2 + a],
                V((k - 1) / D, irq_half*D/2 + a));
      end
      wr_valid = (k < 3 * D) && ($urandom_range(0, 1) != 0);
      wr_data  = V(k / D, k % D);
      if (wr_valid) k++;
    end
    wr_valid = 0;
    checks++;
    if (irq_cnt != 6) begin failures++; $display("FAIL bottom-up irq count %0d", irq_cnt); end

    // ---- restart after a partial lap begins again at address 0 ----
    restart(DIR_TOP_DOWN);  // address walk check expects 0 first
    rd_ready = 1;
    repeat (10) @(negedge clk);
    rd_ready = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
