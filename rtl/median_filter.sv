// median_filter: rolling median over the last WINDOW samples (64 by default),
// used to clean the 12-bit ADC readings of the pole-angle potentiometer.
//
// The window is kept as a sorted list of WINDOW entries, each holding a
// sample value and its age (0 = newest). Ages are always a permutation of
// 0..WINDOW-1, so exactly one entry has age WINDOW-1: the oldest. For every
// accepted sample the list is updated in a single cycle: the oldest entry is
// removed (the entries above it move down by one), the new sample is inserted
// at its rank (entries above it move up by one), and all other ages advance.
// The median is the entry at position WINDOW/2 of the new list (the upper of
// the two middle entries for an even window).
//
// Interface: in_valid/in_data, one sample per cycle at most. out_valid pulses
// on the cycle after each accepted sample, with median holding the median of
// the window that ends with that sample. After reset the window holds WINDOW
// zeros, so the first WINDOW/2 outputs are biased towards zero.
//
// The 64-sample rolling median is the published filter; the sorted-list
// structure, the even-window rule and the zero-filled start are this
// design's choices.
module median_filter #(
  parameter int W      = 12,
  parameter int WINDOW = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] median
);

  localparam int AW = $clog2(WINDOW);

  logic [W-1:0]  val     [WINDOW];
  logic [AW-1:0] age     [WINDOW];
  logic [W-1:0]  val_nxt [WINDOW];
  logic [AW-1:0] age_nxt [WINDOW];

  // List with the oldest entry removed (WINDOW-1 entries), then the new
  // sample inserted.
  logic [W-1:0]  rv [WINDOW-1];
  logic [AW-1:0] ra [WINDOW-1];
  logic [WINDOW-1:0] past_old;   // past_old[i]: the oldest entry is at i or below
  logic [WINDOW-1:0] lt;         // lt[i]: rv[i] <= in_data (a prefix of ones)

  always_comb begin
    logic seen;
    seen = 1'b0;
    for (int i = 0; i < WINDOW; i++) begin
      seen        = seen || (age[i] == AW'(WINDOW - 1));
      past_old[i] = seen;
    end
    for (int i = 0; i < WINDOW - 1; i++) begin
      rv[i] = past_old[i] ? val[i+1] : val[i];
      ra[i] = past_old[i] ? age[i+1] : age[i];
    end
    for (int i = 0; i < WINDOW; i++)
      lt[i] = (i < WINDOW - 1) ? (rv[i] <= in_data) : 1'b0;
    for (int i = 0; i < WINDOW; i++) begin
      if (lt[i]) begin
        val_nxt[i] = rv[i];
        age_nxt[i] = ra[i] + 1'b1;
      end else if (i == 0 || lt[i-1]) begin
        val_nxt[i] = in_data;
        age_nxt[i] = '0;
      end else begin
        val_nxt[i] = rv[i-1];
        age_nxt[i] = ra[i-1] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WINDOW; i++) begin
        val[i] <= '0;
        age[i] <= AW'(i);
      end
      out_valid <= 1'b0;
      median    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        val    <= val_nxt;
        age    <= age_nxt;
        median <= val_nxt[WINDOW/2];
      end
    end
  end

  initial assert (WINDOW >= 2 && (1 << AW) == WINDOW)
    else $error("median_filter: WINDOW must be a power of two");

endmodule
