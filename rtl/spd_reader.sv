// spd_reader -- single-photon-detector reader of the receiver: samples the
// asynchronous detector outputs in the system clock and packs the samples
// into 32-bit words for the memory manager.
//
// Each of the NCH detector lines passes through a SYNC_STAGES flip-flop
// synchronizer (the async-to-sync stage) and a rising-edge detector, so one
// detection, however long the detector's output pulse, becomes a single 1 in
// the clock cycle in which its leading edge was first seen. Every clock cycle
// yields an NCH-bit sample (bit c = detector c fired in that cycle); sample k
// of a word is placed at bits [k*NCH +: NCH], so a word covers WORD_W/NCH
// consecutive cycles and the bit position gives the detection time with the
// resolution of one clock period. The resulting bitstring is the "digital
// temporal description" of the detections that the processor forwards for
// sifting (receiver) or for extraction (random number generator).
//
// Timing: word_valid pulses for one cycle every WORD_W/NCH cycles while
// enable is high; an edge on spd_in reaches the sample SYNC_STAGES + 1
// cycles later. enable low clears the packer, so the first word after enable
// rises starts at a word boundary.
//
// From the published design: detector outputs sampled by the FPGA, an
// async-to-sync stage in the reader, samples accumulated and handed as 32-bit
// words to the memory manager. The synchronizer depth, the edge detection,
// the packing order and the default of four detectors are this design's
// choices.
module spd_reader
  import qcomm_pkg::*;
#(
  parameter int unsigned NCH         = 4,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [NCH-1:0]    spd_in,      // asynchronous detector outputs
  output logic [WORD_W-1:0] word,
  output logic              word_valid
);

  localparam int unsigned SAMPLES = WORD_W / NCH;
  localparam int unsigned CW      = (SAMPLES > 1) ? $clog2(SAMPLES) : 1;

  logic [NCH-1:0] sync [SYNC_STAGES];
  logic [NCH-1:0] prev;
  logic [NCH-1:0] sample;
  logic [CW-1:0]  cnt;
  logic [WORD_W-NCH-1:0] acc;  // samples 0 .. SAMPLES-2 of the word being built

  assign sample = sync[SYNC_STAGES-1] & ~prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SYNC_STAGES; i++) sync[i] <= '0;
      prev <= '0;
    end else begin
      sync[0] <= spd_in;
      for (int i = 1; i < SYNC_STAGES; i++) sync[i] <= sync[i-1];
      prev <= sync[SYNC_STAGES-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      acc        <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else if (!enable) begin
      cnt        <= '0;
      acc        <= '0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= 1'b0;
      if (cnt == CW'(SAMPLES - 1)) begin
        cnt        <= '0;
        word       <= {sample, acc};
        word_valid <= 1'b1;
      end else begin
        acc[cnt*NCH +: NCH] <= sample;
        cnt                 <= cnt + 1'b1;
      end
    end
  end

endmodule
