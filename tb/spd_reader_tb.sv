// spd_reader_tb -- self-checking test of the single-photon-detector reader.
//
// Detector lines are driven with random pulses of random length, changed
// away from the clock edges. The testbench samples them itself at every edge
// (s[k]), forms the detection events e[k] = s[k] & ~s[k-1], and expects
// sample n of the stream after enable (first sampled at edge E) to be
// e[E - 2 + n], which is the documented SYNC_STAGES + 1 = 3 cycle latency
// from the line to the packed sample. Every word is compared, the word rate
// (one per 32/NCH cycles) is checked, and a second enable period checks that
// packing restarts on a word boundary.
module spd_reader_tb;
  import qcomm_pkg::*;

  localparam int NCH = 4, SAMPLES = WORD_W / NCH, NEDGE = 6000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, enable;
  logic [NCH-1:0] spd_in;
  logic [WORD_W-1:0] word;
  logic word_valid;

  spd_reader #(.NCH(NCH)) dut (.*);

  int checks = 0, failures = 0;
  logic [NCH-1:0] s [NEDGE], e [NEDGE];
  int k;             // edges seen
  int E;             // edge at which enable was first sampled high
  int n;             // samples expected so far in this enable period
  int last_word_k, n_events, n_long;

  initial begin : watchdog
    repeat (NEDGE - 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    s[k] = spd_in;
    e[k] = (k == 0) ? '0 : (spd_in & ~s[k-1]);
    if (enable && E < 0) E = k;
    k++;
  end

  always @(negedge clk) if (rst_n && word_valid) begin
    logic [WORD_W-1:0] exp_w;
    for (int i = 0; i < SAMPLES; i++) exp_w[i*NCH +: NCH] = e[E - 2 + n + i];
    checks++;
    if (word !== exp_w) begin
      failures++;
      $display("FAIL word %0d: got %h expected %h", n / SAMPLES, word, exp_w);
    end
    for (int i = 0; i < WORD_W; i++) n_events += int'(exp_w[i]);
    if (last_word_k >= 0) begin
      checks++;
      if (k - last_word_k != SAMPLES) begin
        failures++;
        $display("FAIL word spacing %0d", k - last_word_k);
      end
    end
    last_word_k = k;
    n += SAMPLES;
  end

  // random detector activity, changes 3 ns after an edge
  initial begin
    spd_in = '0;
    forever begin
      @(posedge clk); #3;
      for (int c = 0; c < NCH; c++)
        if ($urandom_range(0, 5) == 0) spd_in[c] = ~spd_in[c];
      if ($urandom_range(0, 200) == 0) begin  // a long pulse on line 0
        spd_in[0] = 1;
        repeat (12) @(posedge clk);
        #3 spd_in[0] = 0;
        n_long++;
      end
    end
  end

  task automatic period(input int cycles);
    @(negedge clk);
    E = -1; n = 0; last_word_k = -1;
    enable = 1;
    repeat (cycles) @(negedge clk);
    enable = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; enable = 0; k = 0; E = -1; n = 0; last_word_k = -1;
    n_events = 0; n_long = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    period(2001);   // ends inside a word
    period(1500);
    checks++;
    if (n < 1400 || n_events < 100 || n_long == 0) begin
      failures++;
      $display("FAIL too little activity: samples %0d events %0d long %0d", n, n_events, n_long);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
