// qstates_controller -- qubit-state controller of the transmitter: turns the
// polarization and decoy symbol streams into the electrical pulses that drive
// the laser and the two electro-optical modulators.
//
// Every qubit occupies one slot of P = max(cfg.period, 3) clock cycles. At a
// 200 MHz clock one cycle is a 5 ns pulse, so P = 3 is the nominal 15 ns slot
// and P = 4 the 50 MHz repetition rate of the long continuous test. Inside a
// slot (cycle 0 = slot start):
//   laser_out : one-cycle pulse at cycle 0, except when the decoy symbol is
//               DEC_OFF (or the unused code 3), which switches the laser off;
//   pol_out   : one-cycle pulse at cycle 0, 1 or 2 for polarization symbol
//               0, 1 or 2 (three states); none for the unused code 3;
//   decoy_out : one-cycle pulse at cycle 0 or 1 for decoy symbol 0 or 1 (two
//               of the three intensity levels); none when the laser is off.
// Each output then passes through its own run-time delay (cfg.off_*, whole
// cycles) and an output register: an edge appears 1 + off_* cycles after
// the cycle named above.
//
// Data: two valid/ready word streams, one per memory, each word holding 16
// two-bit symbols used least-significant pair first. A new pair of words is
// taken (both streams popped in the same cycle) when the previous pair is
// used up; if either stream has no word then, the controller waits and no
// slot is sent (the slot train simply starts late). Qubit slots follow each
// other without gaps while data is available.
//
// Control: a rising edge of enable starts a transmission of cfg.length qubits
// (cfg.length = 0: no end). busy is high while sending; done rises after the
// last slot and stays until enable is lowered. Lowering enable aborts at
// once. cfg must be stable while busy. sent counts the slots started.
//
// From the published design: the 5 ns pulse at 200 MHz, the three
// polarization positions in a 15 ns slot, two decoy positions plus laser
// switch-off, the laser pulse at the start of every slot except in one decoy
// state, two separate 2+2-bit data paths, per-output time offsets, and the
// qubit frequency and transmission length as processor-set parameters. The
// numeric symbol codes, the slot start at the first cycle, the LSB-first
// symbol order and the stall-on-empty rule are this design's choices.
module qstates_controller
  import qcomm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  tx_cfg_t           cfg,
  // polarization word stream
  input  logic [WORD_W-1:0] pol_data,
  input  logic              pol_valid,
  output logic              pol_ready,
  // decoy word stream
  input  logic [WORD_W-1:0] dec_data,
  input  logic              dec_valid,
  output logic              dec_ready,
  // pulses towards the driving stage
  output logic              laser_out,
  output logic              pol_out,
  output logic              decoy_out,
  // status
  output logic              busy,
  output logic              done,
  output logic [31:0]       sent
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e            state;
  logic              enable_q;
  logic [7:0]        slot_len;   // P
  logic [7:0]        ph;         // cycle inside the current slot
  logic              active;     // a slot is being output
  pol_sym_e          cur_pol;
  dec_sym_e          cur_dec;
  logic [WORD_W-1:0] pol_sr, dec_sr;
  logic [4:0]        syms_left;  // symbols still unused in pol_sr / dec_sr
  logic              slot_free;  // the next slot may start this cycle
  logic              at_end;     // all requested qubits started
  logic              take_words; // pop both streams and start a slot
  logic              take_sr;    // start a slot from the shift registers

  assign slot_len  = (cfg.period < 8'(MIN_SLOT)) ? 8'(MIN_SLOT) : cfg.period;
  assign slot_free = !active || (ph == slot_len - 8'd1);
  assign at_end    = (cfg.length != 32'd0) && (sent == cfg.length);

  assign take_words = (state == S_RUN) && enable && slot_free && !at_end
                      && (syms_left == 5'd0) && pol_valid && dec_valid;
  assign take_sr    = (state == S_RUN) && enable && slot_free && !at_end
                      && (syms_left != 5'd0);
  assign pol_ready  = take_words;
  assign dec_ready  = take_words;
  assign busy       = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      enable_q  <= 1'b0;
      ph        <= '0;
      active    <= 1'b0;
      cur_pol   <= POL_NONE;
      cur_dec   <= DEC_OFF;
      pol_sr    <= '0;
      dec_sr    <= '0;
      syms_left <= '0;
      sent      <= '0;
      done      <= 1'b0;
    end else begin
      enable_q <= enable;
      if (!enable) begin
        state     <= S_IDLE;
        active    <= 1'b0;
        syms_left <= '0;
        done      <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: if (!enable_q) begin   // rising edge of enable
            state     <= S_RUN;
            sent      <= '0;
            syms_left <= '0;
            active    <= 1'b0;
          end
          S_RUN: begin
            if (take_words) begin
              cur_pol   <= pol_sym_e'(pol_data[SYM_W-1:0]);
              cur_dec   <= dec_sym_e'(dec_data[SYM_W-1:0]);
              pol_sr    <= pol_data >> SYM_W;
              dec_sr    <= dec_data >> SYM_W;
              syms_left <= 5'(SYMS_PER_WORD - 1);
            end else if (take_sr) begin
              cur_pol   <= pol_sym_e'(pol_sr[SYM_W-1:0]);
              cur_dec   <= dec_sym_e'(dec_sr[SYM_W-1:0]);
              pol_sr    <= pol_sr >> SYM_W;
              dec_sr    <= dec_sr >> SYM_W;
              syms_left <= syms_left - 5'd1;
            end
            if (take_words || take_sr) begin
              active <= 1'b1;
              ph     <= '0;
              sent   <= sent + 32'd1;
            end else if (slot_free) begin
              active <= 1'b0;            // no data or no more qubits
              if (at_end) begin
                state <= S_DONE;
                done  <= 1'b1;
              end
            end else begin
              ph <= ph + 8'd1;
            end
          end
          S_DONE: ;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // Raw pulses, before the per-output offsets.
  logic laser_on, laser_raw, pol_raw, decoy_raw;

  assign laser_on  = (cur_dec == DEC_POS0) || (cur_dec == DEC_POS1);
  assign laser_raw = active && laser_on && (ph == 8'd0);
  assign pol_raw   = active && (cur_pol != POL_NONE) && (ph == 8'(cur_pol));
  assign decoy_raw = active && laser_on && (ph == 8'(cur_dec));

  pulse_delay #(.DLY_W(4)) u_dly_laser (
    .clk, .rst_n, .delay(cfg.off_laser), .d(laser_raw), .q(laser_out));
  pulse_delay #(.DLY_W(4)) u_dly_pol (
    .clk, .rst_n, .delay(cfg.off_pol),   .d(pol_raw),   .q(pol_out));
  pulse_delay #(.DLY_W(4)) u_dly_decoy (
    .clk, .rst_n, .delay(cfg.off_decoy), .d(decoy_raw), .q(decoy_out));

  // Both streams are popped together.
  a_pop_together : assert property (@(posedge clk) disable iff (!rst_n)
      pol_ready == dec_ready)
    else $error("qstates_controller: streams popped apart");

endmodule
