// pulse_delay -- delays a one-bit pulse train by a run-time number of clock
// cycles, used to give each transmitter output its own time offset.
//
// The input is shifted through MAX_DELAY flip-flops; delay selects the tap.
// The output is registered, so the total latency is delay + 1 cycles. The
// published transmitter applies "a dedicated time offset" to each signal to
// match optical path lengths; that the offset is counted in whole clock
// cycles, and its range, are this design's choices.
module pulse_delay #(
  parameter int unsigned DLY_W     = 4,
  localparam int unsigned MAX_DELAY = (1 << DLY_W) - 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DLY_W-1:0] delay,
  input  logic             d,
  output logic             q
);

  logic [MAX_DELAY:1] sr;    // sr[k] holds the input of k cycles ago
  logic [MAX_DELAY:0] taps;  // taps[0] is the undelayed input

  assign taps = {sr, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0;
      q  <= 1'b0;
    end else begin
      sr <= taps[MAX_DELAY-1:0];
      q  <= taps[delay];
    end
  end

endmodule
