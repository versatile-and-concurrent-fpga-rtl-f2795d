// qcomm_fpga_top -- FPGA layer of a quantum-communication controller that
// serves as QKD transmitter (top-down) or as QKD receiver (bottom-up).
//
// Two block RAMs, each with its own memory manager, sit between the
// processor and the custom logic:
//   memory 0 -- polarization symbols (top-down) or detector samples
//               (bottom-up);
//   memory 1 -- decoy (intensity) symbols (top-down only).
// Top-down (mode = DIR_TOP_DOWN): the processor fills both memories through
// the cpu_* ports, then raises tx_enable. Both managers stream their words to
// the qubit-state controller, which sends one qubit per tx_cfg.period cycles
// as laser / polarization / decoy pulses. Each time a manager has read out a
// half of its memory it pulses irq[i] with irq_half[i] naming that half, and
// the processor refills it while the other half is being sent, so the
// transmission can go on without end.
// Bottom-up (mode = DIR_BOTTOM_UP): with rx_enable high the detector reader
// packs the sampled detector lines into words, manager 0 writes them to
// memory 0 in ring order and interrupts at the end of each half so that the
// processor can read that half out.
//
// Ports: mode, tx_enable, tx_cfg and rx_enable stand for the processor's
// GPIO outputs; tx_busy, tx_done, tx_sent, irq and irq_half for its GPIO
// inputs; cpu_* for the DMA side of the two memories (index 0 and 1 as
// above, word addresses, one-cycle read latency). Change mode only while
// tx_enable and rx_enable are low. All logic runs on clk; spd_in is
// asynchronous. The default sizes (32768 words of 32 bits per memory, four
// detector lines) are this design's own: the paper gives only "the order of
// Mbits" per BRAM.
//
// Following the published architecture: the split of processor and fabric
// work, BRAMs split in halves with an interrupt per half, separate memories
// for polarization and decoy data, and the memory manager, qubit-state
// controller and detector reader as the custom blocks. Sharing memory 0
// between the two directions through one mode bit is this design's choice
// (the published system is rebuilt for each application).
module qcomm_fpga_top
  import qcomm_pkg::*;
#(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned NCH   = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // processor GPIO outputs: configuration
  input  dir_e                   mode,
  input  logic                   tx_enable,
  input  tx_cfg_t                tx_cfg,
  input  logic                   rx_enable,
  // processor GPIO inputs: status and interrupts
  output logic                   tx_busy,
  output logic                   tx_done,
  output logic [31:0]            tx_sent,
  output logic [1:0]             irq,
  output logic [1:0]             irq_half,
  // processor / DMA side of the two memories
  input  logic [1:0]             cpu_en,
  input  logic [1:0]             cpu_we,
  input  logic [1:0][AW-1:0]     cpu_addr,
  input  logic [1:0][WORD_W-1:0] cpu_wdata,
  output logic [1:0][WORD_W-1:0] cpu_rdata,
  // quantum system: driving stage and detectors
  output logic                   laser_out,
  output logic                   pol_out,
  output logic                   decoy_out,
  input  logic [NCH-1:0]         spd_in
);

  logic              top_down;
  logic [1:0]        mm_enable;
  dir_e [1:0]        mm_dir;
  logic [1:0]        m_en, m_we;
  logic [1:0][AW-1:0]     m_addr;
  logic [1:0][WORD_W-1:0] m_wdata, m_rdata;
  logic [1:0][WORD_W-1:0] s_data;
  logic [1:0]        s_valid, s_ready;
  logic [WORD_W-1:0] rx_word;
  logic              rx_valid;

  assign top_down     = (mode == DIR_TOP_DOWN);
  assign mm_enable[0] = top_down ? tx_enable : rx_enable;
  assign mm_enable[1] = top_down && tx_enable;
  assign mm_dir[0]    = mode;
  assign mm_dir[1]    = DIR_TOP_DOWN;

  for (genvar i = 0; i < 2; i++) begin : g_mem
    tdp_bram #(.WIDTH(WORD_W), .DEPTH(DEPTH)) u_bram (
      .clk,
      .a_en   (cpu_en[i]),
      .a_we   (cpu_we[i]),
      .a_addr (cpu_addr[i]),
      .a_wdata(cpu_wdata[i]),
      .a_rdata(cpu_rdata[i]),
      .b_en   (m_en[i]),
      .b_we   (m_we[i]),
      .b_addr (m_addr[i]),
      .b_wdata(m_wdata[i]),
      .b_rdata(m_rdata[i])
    );

    memory_manager #(.DEPTH(DEPTH)) u_mm (
      .clk,
      .rst_n,
      .enable   (mm_enable[i]),
      .dir      (mm_dir[i]),
      .mem_en   (m_en[i]),
      .mem_we   (m_we[i]),
      .mem_addr (m_addr[i]),
      .mem_wdata(m_wdata[i]),
      .mem_rdata(m_rdata[i]),
      .rd_data  (s_data[i]),
      .rd_valid (s_valid[i]),
      .rd_ready (s_ready[i]),
      .wr_data  (rx_word),
      .wr_valid (rx_valid && (i == 0)),
      .irq      (irq[i]),
      .irq_half (irq_half[i])
    );
  end

  qstates_controller u_qsc (
    .clk,
    .rst_n,
    .enable   (top_down && tx_enable),
    .cfg      (tx_cfg),
    .pol_data (s_data[0]),
    .pol_valid(s_valid[0]),
    .pol_ready(s_ready[0]),
    .dec_data (s_data[1]),
    .dec_valid(s_valid[1]),
    .dec_ready(s_ready[1]),
    .laser_out,
    .pol_out,
    .decoy_out,
    .busy     (tx_busy),
    .done     (tx_done),
    .sent     (tx_sent)
  );

  spd_reader #(.NCH(NCH)) u_sr (
    .clk,
    .rst_n,
    .enable    (!top_down && rx_enable),
    .spd_in,
    .word      (rx_word),
    .word_valid(rx_valid)
  );

endmodule
