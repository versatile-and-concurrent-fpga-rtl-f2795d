// memory_manager -- moves 32-bit words between one BRAM and a custom block,
// walking the BRAM as a ring of two halves and interrupting the processor at
// the end of each half.
//
// Top-down (dir = DIR_TOP_DOWN): the manager reads the BRAM at consecutive
// addresses and offers each word on a valid/ready stream (rd_*) to the qubit
// controller. It keeps one word ready in an output register; when that word
// is taken it issues the next read, so the stream refills two cycles after a
// pop. Bottom-up (dir = DIR_BOTTOM_UP): every word arriving on wr_* (valid
// only, the manager never stalls) is written to the next address.
//
// In both directions the address wraps from DEPTH-1 to 0. When the manager
// touches the last address of a half (DEPTH/2-1 or DEPTH-1) it raises irq for
// one cycle and sets irq_half to the half it has just finished (0 = lower,
// 1 = upper). From then on the processor may refill (top-down) or drain
// (bottom-up) that half while the manager works in the other one. In the
// read direction "finished" means the last word of the half has been read
// out of the BRAM; the fabric may still hold it in registers.
//
// enable low holds the manager idle with its address at 0 and its output
// register empty; raising it starts from address 0. dir must only change
// while enable is low.
//
// The published design gives the manager's role: moving data between the
// BRAM(s) and the custom blocks, 32-bit words to consecutive addresses, and
// a signal at the end of each half read by a GPIO as an interrupt. The
// stream handshakes, the one-cycle interrupt pulse with a half indicator and
// the restart-from-zero on enable are this design's own.
module memory_manager
  import qcomm_pkg::*;
#(
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  dir_e              dir,
  // BRAM port (fabric side)
  output logic              mem_en,
  output logic              mem_we,
  output logic [AW-1:0]     mem_addr,
  output logic [WORD_W-1:0] mem_wdata,
  input  logic [WORD_W-1:0] mem_rdata,
  // top-down stream towards the qubit controller
  output logic [WORD_W-1:0] rd_data,
  output logic              rd_valid,
  input  logic              rd_ready,
  // bottom-up stream from the detector reader
  input  logic [WORD_W-1:0] wr_data,
  input  logic              wr_valid,
  // interrupt towards the processor (through a GPIO input)
  output logic              irq,
  output logic              irq_half
);

  localparam logic [AW-1:0] HALF_LAST = AW'(DEPTH / 2 - 1);
  localparam logic [AW-1:0] FULL_LAST = AW'(DEPTH - 1);

  logic [AW-1:0] addr;
  logic          pend;      // a read was issued last cycle
  logic          rd_issue;  // issue a read this cycle
  logic          wr_issue;  // issue a write this cycle
  logic          step;      // the address advances this cycle

  // A read is issued when nothing is in flight and the output register is
  // empty or being emptied.
  assign rd_issue = enable && (dir == DIR_TOP_DOWN) && !pend
                    && (!rd_valid || rd_ready);
  assign wr_issue = enable && (dir == DIR_BOTTOM_UP) && wr_valid;
  assign step     = rd_issue || wr_issue;

  assign mem_en    = step;
  assign mem_we    = wr_issue;
  assign mem_addr  = addr;
  assign mem_wdata = wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr     <= '0;
      pend     <= 1'b0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
      irq      <= 1'b0;
      irq_half <= 1'b0;
    end else if (!enable) begin
      addr     <= '0;
      pend     <= 1'b0;
      rd_valid <= 1'b0;
      irq      <= 1'b0;
    end else begin
      irq  <= 1'b0;
      pend <= rd_issue;
      if (pend) begin
        rd_data  <= mem_rdata;
        rd_valid <= 1'b1;
      end else if (rd_ready) begin
        rd_valid <= 1'b0;
      end
      if (step) begin
        addr <= (addr == FULL_LAST) ? '0 : addr + 1'b1;
        if (addr == HALF_LAST || addr == FULL_LAST) begin
          irq      <= 1'b1;
          irq_half <= (addr == FULL_LAST);
        end
      end
    end
  end

  // A word offered on the read stream stays put until it is taken.
  a_rd_hold : assert property (@(posedge clk) disable iff (!rst_n)
      enable && rd_valid && !rd_ready ##1 enable |-> rd_valid && $stable(rd_data))
    else $error("memory_manager: rd stream word changed before it was taken");

  // The output register is empty whenever a read returns, so no word is lost.
  a_no_overwrite : assert property (@(posedge clk) disable iff (!rst_n)
      pend && enable |-> !rd_valid)
    else $error("memory_manager: rd stream word overwritten");

endmodule
