// qstates_controller_tb -- self-checking test of the qubit-state controller.
//
// The testbench feeds random polarization and decoy words, records the cycle
// in which each pair of words is taken, and from that alone builds the pulse
// trains it expects: qubit j of a word taken in cycle k has its slot start in
// cycle k+1+j*P, and a pulse at slot cycle c leaves the output register in
// cycle k+2+j*P+c+offset. Laser at c=0 unless the decoy symbol switches the
// laser off; polarization at c=symbol (0..2); decoy at c=symbol (0..1).
// Every output is compared with the expectation in every cycle. Runs cover
// the 50 MHz slot (P=4) with an exact word rate check, the 15 ns slot (P=3)
// with offsets and a stalling source, a period below the minimum, a finite
// transmission length ending inside a word, done/busy/sent, and abort.
module qstates_controller_tb;
  import qcomm_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, enable;
  tx_cfg_t cfg;
  logic [WORD_W-1:0] pol_data, dec_data;
  logic pol_valid, dec_valid, pol_ready, dec_ready;
  logic laser_out, pol_out, decoy_out, busy, done;
  logic [31:0] sent;

  qstates_controller dut (.*);

  int checks = 0, failures = 0;
  localparam int NCYC = 40000;
  bit exp_l [NCYC], exp_p [NCYC], exp_d [NCYC];
  int cyc;          // posedges seen
  int qubits;       // qubits scheduled in this run
  int last_pop;     // cycle of previous pop
  int n_pops, n_laser_off, n_pos [3], n_dpos [2];
  int gap_max;      // source: longest gap before a new word is valid
  int stall_words;  // words the source delayed past the slot end
  bit check_rate;
  int P;

  task automatic fail(input string what);
    failures++;
    $display("FAIL %s at cycle %0d", what, cyc);
  endtask

  initial begin : watchdog
    repeat (NCYC - 10) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The handshake is sampled at the clock edge (before the controller's
  // registers update), so a word put up and taken within one cycle is seen.
  int pop_at;
  bit pop_seen;
  always @(posedge clk) begin
    if (rst_n && pol_ready && pol_valid && dec_valid) begin
      pop_seen = 1;
      pop_at   = cyc;
    end
    cyc++;
  end

  // compare outputs every cycle
  bit ignore;  // set while the delay lines drain after an abort
  always @(negedge clk) if (rst_n && !ignore) begin
    checks++;
    if (laser_out !== exp_l[cyc] || pol_out !== exp_p[cyc] || decoy_out !== exp_d[cyc])
      fail($sformatf("pulses l/p/d got %b%b%b expected %b%b%b", laser_out, pol_out,
                     decoy_out, exp_l[cyc], exp_p[cyc], exp_d[cyc]));
  end

  // source: on a pop, schedule the expected pulses and prepare the next word
  int wait_cnt;
  always @(negedge clk) if (rst_n) begin
    if (pol_ready !== dec_ready) fail("streams popped apart");
    if (pop_seen) begin
      pop_seen = 0;
      if (check_rate && last_pop >= 0) begin
        checks++;
        if (pop_at - last_pop != 16 * P) fail($sformatf("word period %0d", pop_at - last_pop));
      end
      last_pop = pop_at;
      n_pops++;
      for (int j = 0; j < 16; j++) begin
        int p, d, t;
        if (cfg.length != 0 && qubits == int'(cfg.length)) break;
        p = int'(pol_data[2*j +: 2]);
        d = int'(dec_data[2*j +: 2]);
        t = pop_at + 2 + j * P;
        if (d < 2) begin
          exp_l[t + int'(cfg.off_laser)] = 1;
          exp_d[t + d + int'(cfg.off_decoy)] = 1;
          n_dpos[d]++;
        end else n_laser_off++;
        if (p < 3) begin
          exp_p[t + p + int'(cfg.off_pol)] = 1;
          n_pos[p]++;
        end
        qubits++;
      end
      pol_data = $urandom;
      dec_data = $urandom;
      wait_cnt = (gap_max == 0) ? 0 : $urandom_range(0, gap_max);
      if (wait_cnt > 16 * P) stall_words++;
      pol_valid = (wait_cnt == 0);
      dec_valid = (wait_cnt == 0);
    end else if (!pol_valid) begin
      if (wait_cnt > 0) wait_cnt--;
      if (wait_cnt == 0) begin pol_valid = 1; dec_valid = 1; end
    end
  end

  task automatic run(input int per, input int len, input int ol, op, od,
                     input int gap, input bit rate, input int stop_after);
    @(negedge clk);
    enable = 0;
    cfg.period = 8'(per); cfg.length = 32'(len);
    cfg.off_laser = 4'(ol); cfg.off_pol = 4'(op); cfg.off_decoy = 4'(od);
    P = (per < 3) ? 3 : per;
    gap_max = gap; check_rate = rate; last_pop = -1; qubits = 0;
    pol_data = $urandom; dec_data = $urandom; pol_valid = 1; dec_valid = 1; wait_cnt = 0; pop_seen = 0;
    repeat (3) @(negedge clk);
    enable = 1;
    if (len != 0) begin
      // wait for done, then check status
      for (int i = 0; i < 20000 && !done; i++) @(negedge clk);
      checks++;
      if (!done) fail("done never rose");
      checks++;
      if (sent != 32'(len)) fail($sformatf("sent %0d expected %0d", sent, len));
      checks++;
      if (busy) fail("busy after done");
      repeat (20) @(negedge clk);   // let offset pulses drain
    end else begin
      repeat (stop_after) @(negedge clk);
      checks++;
      if (!busy) fail("not busy while streaming");
      // abort: clear expectations made for slots that will not be sent
      enable = 0;
      for (int i = cyc + 1; i < NCYC; i++) begin exp_l[i] = 0; exp_p[i] = 0; exp_d[i] = 0; end
      // pulses already in the delay lines when enable fell still come out:
      // outputs are not compared until the lines are empty
      ignore = 1;
      @(negedge clk);
      checks++;
      if (busy) fail("busy after abort");
      repeat (20) @(negedge clk);
      ignore = 0;
      repeat (5) @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 0; enable = 0; cfg = '0; cyc = 0; ignore = 0;
    pol_valid = 0; dec_valid = 0; pol_data = '0; dec_data = '0;
    n_pops = 0; n_laser_off = 0; n_pos = '{0, 0, 0}; n_dpos = '{0, 0};
    stall_words = 0; last_pop = -1; P = 3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 50 MHz at 200 MHz clock, 40 qubits, steady source: exact rate
    run(4, 40, 0, 0, 0, 0, 1, 0);
    // 15 ns slot, offsets, stalling source, continuous until aborted
    run(3, 0, 2, 5, 15, 70, 0, 3000);
    // period below the minimum is raised to three cycles
    run(1, 37, 1, 0, 3, 0, 1, 0);
    // long slot, random offsets, a few gaps
    run(9, 100, 7, 3, 0, 200, 0, 0);

    checks++;
    if (n_pops < 20 || n_laser_off == 0 || n_pos[0] == 0 || n_pos[1] == 0 || n_pos[2] == 0
        || n_dpos[0] == 0 || n_dpos[1] == 0 || stall_words == 0)
      fail("a symbol kind or a stall never occurred");
    $display("pops=%0d laser_off=%0d stalls=%0d", n_pops, n_laser_off, stall_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
