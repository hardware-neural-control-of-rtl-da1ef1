// quad_encoder: quadrature decoder for the cart motor's incremental encoder.
//
// Channels a and b are synchronised with two flip-flops each, then every edge
// of either channel moves the signed position counter by one (4x decoding):
// +1 when the channels step 00 -> 10 -> 11 -> 01 -> 00 (a leads b), -1 the
// other way. A step in which both channels change at once cannot be decoded:
// the count is left as it is and err pulses for one cycle. The count wraps at
// CNT_W bits. Latency: the count reflects an input edge three clock edges
// later (two synchroniser stages plus the counter register).
//
// The published cart encoder gives 1200 counts per revolution of the gearbox
// output shaft, 118.8 counts per cm of cart travel, so the 44 cm track spans
// about 5,230 counts and CNT_W = 16 suffices. Whether the 1200 counts are
// already quadrature edges is not stated; the 4x decoding, the direction
// convention and the error rule are this design's choices.
module quad_encoder #(
  parameter int CNT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    a,
  input  logic                    b,
  output logic signed [CNT_W-1:0] count,
  output logic                    err
);

  logic [1:0] sa, sb;      // synchronisers
  logic [1:0] prev, cur;

  assign cur = {sa[1], sb[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa    <= '0;
      sb    <= '0;
      prev  <= '0;
      count <= '0;
      err   <= 1'b0;
    end else begin
      sa   <= {sa[0], a};
      sb   <= {sb[0], b};
      prev <= cur;
      err  <= 1'b0;
      unique case ({prev, cur})
        4'b00_10, 4'b10_11, 4'b11_01, 4'b01_00: count <= count + 1'b1;
        4'b00_01, 4'b01_11, 4'b11_10, 4'b10_00: count <= count - 1'b1;
        4'b00_11, 4'b11_00, 4'b01_10, 4'b10_01: err   <= 1'b1;
        default: ;   // no change
      endcase
    end
  end

endmodule
