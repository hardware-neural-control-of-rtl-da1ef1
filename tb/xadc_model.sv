// xadc_model: behavioural stand-in for the SoC's built-in 12-bit ADC, with the
// subset of its ports that adc_ctrl uses. Not synthesizable logic for the
// real part: it only mimics its handshake. A convst pulse samples the analog
// value vin (given here as a 12-bit code) and, CONV_CYC cycles later, pulses
// eoc. A read (den) of address CHANNEL answers RD_CYC cycles later with drdy
// and the code left-aligned in a 16-bit word; other addresses read as zero.
module xadc_model #(
  parameter int CONV_CYC = 26,
  parameter int RD_CYC   = 2,
  parameter logic [6:0] CHANNEL = 7'h1E
) (
  input  logic        clk,
  input  logic [11:0] vin,
  input  logic        convst,
  output logic        eoc,
  input  logic        den,
  input  logic [6:0]  daddr,
  output logic        drdy,
  output logic [15:0] do_o
);
  logic [11:0] held = '0, result = '0;
  int conv_cnt = -1, rd_cnt = -1;
  logic [6:0] addr_q = '0;

  initial begin eoc = 1'b0; drdy = 1'b0; do_o = '0; end

  always @(posedge clk) begin
    eoc  <= 1'b0;
    drdy <= 1'b0;
    if (convst) begin held <= vin; conv_cnt <= CONV_CYC - 1; end
    else if (conv_cnt > 0) conv_cnt <= conv_cnt - 1;
    else if (conv_cnt == 0) begin result <= held; eoc <= 1'b1; conv_cnt <= -1; end
    if (den) begin addr_q <= daddr; rd_cnt <= RD_CYC - 1; end
    else if (rd_cnt > 0) rd_cnt <= rd_cnt - 1;
    else if (rd_cnt == 0) begin
      drdy   <= 1'b1;
      do_o   <= (addr_q == CHANNEL) ? {result, 4'h0} : 16'h0;
      rd_cnt <= -1;
    end
  end
endmodule
