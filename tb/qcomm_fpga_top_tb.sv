// qcomm_fpga_top_tb -- end-to-end test of the FPGA layer at its default
// sizes (two 32768-word memories, four detector lines).
//
// A behavioural processor model plays the role of the CPU and DMA engine:
// it fills the memories through the cpu_* ports and answers every interrupt
// by refilling (top-down) or reading out and checking (bottom-up) the half
// that was just finished.
//
// Top-down data: word k of memory i in run r is W(r, i, k), a fixed hash, so
// the symbols of qubit n are known without looking into the design. Slots
// must follow each other every P cycles from the first one (found from
// tx_sent), and every output is compared in every cycle with the pulse that
// qubit should produce (see qstates_controller for the slot layout).
// Bottom-up data: the testbench samples the detector lines itself and
// expects word m written by the design to hold the events of cycles
// E-2+8m .. E-2+8m+7 (E: first edge with the reader enabled).
//
// Sequence: (1) transmitter at 50 MHz-equivalent slots (P = 4), with time
// offsets, for one and a half laps of the ring, ending inside a word;
// (2) switch to bottom-up and record detector data for a lap and a half;
// (3) switch back and send a short run with the minimal 3-cycle slot.
// Each mechanism (interrupt per half and memory, ring wrap, refill picked up,
// laser-off and every pulse position, offsets, end of transmission, mode
// switches, receiver interrupts and wrap) is counted and must occur.
module qcomm_fpga_top_tb;
  import qcomm_pkg::*;

  localparam int unsigned DEPTH = 32768;        // defaults of qcomm_fpga_top
  localparam int unsigned NCH   = 4;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned SPW   = WORD_W / NCH; // detector samples per word

  logic clk = 1'b0;
  always #2.5 clk = ~clk;                       // 200 MHz

  logic rst_n;
  dir_e mode;
  logic tx_enable, rx_enable;
  tx_cfg_t tx_cfg;
  logic tx_busy, tx_done;
  logic [31:0] tx_sent;
  logic [1:0] irq, irq_half;
  logic [1:0] cpu_en, cpu_we;
  logic [1:0][AW-1:0] cpu_addr;
  logic [1:0][WORD_W-1:0] cpu_wdata, cpu_rdata;
  logic laser_out, pol_out, decoy_out;
  logic [NCH-1:0] spd_in;

  qcomm_fpga_top dut (.*);

  int checks = 0, failures = 0;

  // mechanism counters
  int n_irq [2][2];      // [memory][half], top-down
  int n_refill_used;     // words checked that came from a refill
  int n_laser_off, n_pos [3], n_dpos [2], n_offset_pulses;
  int n_tx_done, n_mode_switch, n_rx_irq [2], n_rx_wrap, n_rx_words, n_events;

  task automatic fail(input string what);
    failures++;
    if (failures < 30) $display("FAIL %s at %0t", what, $time);
  endtask

  initial begin : watchdog
    repeat (6_000_000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- data
  function automatic logic [WORD_W-1:0] W(int r, int i, int k);
    logic [31:0] x;
    x = 32'(k) * 32'h9E37_79B1 + 32'(r) * 32'h85EB_CA6B + 32'(i) * 32'hC2B2_AE35;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    return x ^ (x >> 12);
  endfunction

  int run_id;

  function automatic int pol_sym(int n);
    logic [WORD_W-1:0] w = W(run_id, 0, n / 16);
    return int'(w[2*(n%16) +: 2]);
  endfunction
  function automatic int dec_sym(int n);
    logic [WORD_W-1:0] w = W(run_id, 1, n / 16);
    return int'(w[2*(n%16) +: 2]);
  endfunction

  // ---------------------------------------------------------- CPU model
  bit tx_phase, rx_phase;

  task automatic cpu_write_half(input int i, input int half, input int gen);
    for (int a = half * DEPTH / 2; a < (half + 1) * DEPTH / 2; a++) begin
      cpu_en[i] <= 1; cpu_we[i] <= 1;
      cpu_addr[i] <= AW'(a);
      cpu_wdata[i] <= W(run_id, i, gen * DEPTH + a);
      @(posedge clk);
    end
    cpu_en[i] <= 0; cpu_we[i] <= 0;
  endtask

  task automatic cpu_fill(input int i);
    cpu_write_half(i, 0, 0);
    cpu_write_half(i, 1, 0);
  endtask

  // top-down interrupt routine of memory i: refill the finished half
  task automatic tx_service(input int i);
    int gen [2];
    gen = '{0, 0};
    forever begin
      @(posedge clk);
      if (tx_phase && irq[i]) begin
        int h = int'(irq_half[i]);
        n_irq[i][h]++;
        gen[h]++;
        cpu_write_half(i, h, gen[h]);
      end
      if (!tx_phase) gen = '{0, 0};
    end
  endtask

  // bottom-up interrupt routine: read the finished half of memory 0 and
  // compare it with the detector events seen by the testbench
  logic [NCH-1:0] s_prev;
  logic [NCH-1:0] ev [$];  // ev[j]: events of edge E + j - 2
  int E_edge, edges;

  task automatic rx_service();
    int lap, m;
    lap = 0;
    forever begin
      @(posedge clk);
      if (rx_phase && irq[0]) begin
        int h = int'(irq_half[0]);
        n_rx_irq[h]++;
        for (int a = h * DEPTH / 2; a < (h + 1) * DEPTH / 2; a++) begin
          logic [WORD_W-1:0] exp_w;
          cpu_en[0] <= 1; cpu_we[0] <= 0; cpu_addr[0] <= AW'(a);
          @(posedge clk);
          cpu_en[0] <= 0;
          #1;
          m = lap * DEPTH + a;
          for (int j = 0; j < SPW; j++) exp_w[j*NCH +: NCH] = ev[m * SPW + j];
          checks++;
          if (cpu_rdata[0] !== exp_w)
            fail($sformatf("rx word %0d: got %h expected %h", m, cpu_rdata[0], exp_w));
          for (int b = 0; b < WORD_W; b++) n_events += int'(exp_w[b]);
          n_rx_words++;
          if (lap > 0) n_rx_wrap++;
        end
        if (h == 1) lap++;
      end
      if (!rx_phase) lap = 0;
    end
  endtask

  // detector activity and the testbench's own sampling of it
  initial begin
    spd_in = '0;
    forever begin
      @(posedge clk); #1;
      for (int c = 0; c < NCH; c++)
        if ($urandom_range(0, 7) == 0) spd_in[c] = ~spd_in[c];
    end
  end

  // The testbench samples the lines at each edge, as the reader's first
  // synchronizer stage does, and keeps the events from edge E-2 on.
  logic [NCH-1:0] s_hist [2];  // events of the last two edges
  always @(posedge clk) begin
    logic [NCH-1:0] e_now;
    edges++;
    e_now = spd_in & ~s_prev;
    if (rx_phase && E_edge < 0 && rx_enable) begin
      E_edge = edges;
      ev.delete();
      ev.push_back(s_hist[1]);
      ev.push_back(s_hist[0]);
      ev.push_back(e_now);
    end else if (rx_phase && E_edge >= 0) begin
      ev.push_back(e_now);
    end
    s_hist[1] = s_hist[0];
    s_hist[0] = e_now;
    s_prev = spd_in;
  end

  // ------------------------------------------------- transmitter checker
  int S;          // edge count at which the first slot started
  int P, tx_len;
  bit tx_check;

  always @(negedge clk) if (rst_n && tx_check) begin
    int t, u, n, c;
    bit el, ep, ed;
    if (S < 0 && tx_sent == 32'd1) S = edges;
    if (S >= 0) begin
      t = edges;
      el = 0; ep = 0; ed = 0;
      u = t - S - 1 - int'(tx_cfg.off_laser);
      if (u >= 0 && u % P == 0 && u / P < tx_len) el = (dec_sym(u / P) < 2);
      u = t - S - 1 - int'(tx_cfg.off_pol);
      if (u >= 0 && u / P < tx_len) begin
        n = u / P; c = u % P;
        ep = (pol_sym(n) == c) && (c < 3);
      end
      u = t - S - 1 - int'(tx_cfg.off_decoy);
      if (u >= 0 && u / P < tx_len) begin
        n = u / P; c = u % P;
        ed = (dec_sym(n) == c) && (c < 2);
      end
      checks++;
      if (laser_out !== el || pol_out !== ep || decoy_out !== ed)
        fail($sformatf("tx pulses l/p/d got %b%b%b expected %b%b%b (edge %0d)",
                       laser_out, pol_out, decoy_out, el, ep, ed, t));
      if (el && tx_cfg.off_laser != 0) n_offset_pulses++;
      // slot bookkeeping, once per slot at its start
      u = t - S;
      if (u % P == 0 && u / P < tx_len) begin
        n = u / P;
        if (dec_sym(n) >= 2) n_laser_off++; else n_dpos[dec_sym(n)]++;
        if (pol_sym(n) < 3) n_pos[pol_sym(n)]++;
        if (n / 16 >= int'(DEPTH)) n_refill_used++;
      end
    end else begin
      checks++;
      if (laser_out || pol_out || decoy_out) fail("pulse before the first slot");
    end
  end

  task automatic tx_run(input int r, input int per, input int len,
                        input int ol, op, od);
    run_id = r;
    P = (per < 3) ? 3 : per;
    tx_len = len;
    tx_cfg.period = 8'(per); tx_cfg.length = 32'(len);
    tx_cfg.off_laser = 4'(ol); tx_cfg.off_pol = 4'(op); tx_cfg.off_decoy = 4'(od);
    // processor fills both memories before starting
    fork
      cpu_fill(0);
      cpu_fill(1);
    join
    tx_phase = 1;
    S = -1;
    tx_check = 1;
    @(negedge clk);
    tx_enable = 1;
    while (!tx_done) @(negedge clk);
    n_tx_done++;
    checks++;
    if (tx_sent != 32'(len)) fail($sformatf("tx_sent %0d expected %0d", tx_sent, len));
    repeat (P + 20) @(negedge clk);  // last pulses leave the delay lines
    tx_check = 0;
    tx_enable = 0;
    tx_phase = 0;
    @(negedge clk);
  endtask

  task automatic rx_run(input int words);
    @(negedge clk);
    mode = DIR_BOTTOM_UP;
    n_mode_switch++;
    E_edge = -1;
    rx_phase = 1;
    @(negedge clk);
    rx_enable = 1;
    repeat (words * SPW) @(negedge clk);
    rx_enable = 0;
    repeat (DEPTH / 2 + 10) @(negedge clk);  // let the last readout finish
    rx_phase = 0;
    @(negedge clk);
    mode = DIR_TOP_DOWN;
    n_mode_switch++;
  endtask

  initial begin
    rst_n = 0; mode = DIR_TOP_DOWN; tx_enable = 0; rx_enable = 0; tx_cfg = '0;
    cpu_en = '0; cpu_we = '0; cpu_addr = '0; cpu_wdata = '0;
    tx_phase = 0; rx_phase = 0; tx_check = 0; S = -1; P = 4; tx_len = 0; run_id = 0;
    E_edge = -1; edges = 0; s_prev = '0; s_hist = '{default: '0};
    n_irq = '{default: 0}; n_rx_irq = '{0, 0};
    n_refill_used = 0; n_laser_off = 0; n_pos = '{0, 0, 0}; n_dpos = '{0, 0};
    n_offset_pulses = 0; n_tx_done = 0; n_mode_switch = 0; n_rx_wrap = 0;
    n_rx_words = 0; n_events = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    fork
      tx_service(0);
      tx_service(1);
      rx_service();
    join_none

    // (1) 4-cycle slots (50 MHz at 200 MHz), one and a half laps, offsets
    tx_run(1, 4, (DEPTH + DEPTH / 2 + 3) * 16 + 5, 1, 4, 7);
    // (2) receiver for a lap and a half
    rx_run(DEPTH + DEPTH / 2 + 100);
    // (3) back to the transmitter, 15 ns slots, no offsets
    tx_run(2, 3, 1000, 0, 0, 0);

    $display("tx irq mem0 %0d/%0d mem1 %0d/%0d, refill qubits %0d, laser off %0d,",
             n_irq[0][0], n_irq[0][1], n_irq[1][0], n_irq[1][1], n_refill_used, n_laser_off);
    $display("pol pos %0d/%0d/%0d, decoy pos %0d/%0d, offset pulses %0d, tx done %0d,",
             n_pos[0], n_pos[1], n_pos[2], n_dpos[0], n_dpos[1], n_offset_pulses, n_tx_done);
    $display("mode switches %0d, rx irq %0d/%0d, rx words %0d (after wrap %0d), events %0d",
             n_mode_switch, n_rx_irq[0], n_rx_irq[1], n_rx_words, n_rx_wrap, n_events);
    checks++;
    if (n_irq[0][0] < 2 || n_irq[0][1] < 1 || n_irq[1][0] < 2 || n_irq[1][1] < 1)
      fail("top-down interrupts missing");
    checks++; if (n_refill_used == 0) fail("no refilled word was sent");
    checks++; if (n_laser_off == 0) fail("laser-off state never sent");
    checks++;
    if (n_pos[0] == 0 || n_pos[1] == 0 || n_pos[2] == 0 || n_dpos[0] == 0 || n_dpos[1] == 0)
      fail("a pulse position never used");
    checks++; if (n_offset_pulses == 0) fail("time offset never applied");
    checks++; if (n_tx_done != 2) fail("end of transmission not reached twice");
    checks++; if (n_mode_switch != 2) fail("mode switch missing");
    checks++; if (n_rx_irq[0] < 2 || n_rx_irq[1] < 1) fail("bottom-up interrupts missing");
    checks++; if (n_rx_wrap == 0) fail("bottom-up ring never wrapped");
    checks++; if (n_events == 0) fail("no detector events recorded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
