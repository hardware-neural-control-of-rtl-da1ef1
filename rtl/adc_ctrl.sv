// adc_ctrl: sequencer for the SoC's built-in 12-bit ADC (Xilinx XADC style
// interface), sampling one channel at a fixed rate of about 350 kHz.
//
// A free-running divider ticks every DIV = CLK_HZ / SAMPLE_HZ cycles (71
// cycles, 352.1 kHz, at 25 MHz). On a tick the controller pulses convst, waits
// for the converter's end-of-conversion pulse (eoc), reads the result register
// of channel CHANNEL over the dynamic reconfiguration port (den + daddr, then
// drdy with the 16-bit word do_i), and outputs the 12 most significant bits as
// one sample (sample_valid pulses for one cycle; the four low bits of the
// 16-bit result word are below the 12-bit resolution and are not used). A tick that arrives while a
// conversion or read is still in progress is dropped and counted in missed.
//
// The 12-bit ADC and the ~350 kHz rate are published; the handshake, the
// channel address and the drop-on-overrun rule are this design's choices.
module adc_ctrl #(
  parameter int unsigned CLK_HZ    = 25_000_000,
  parameter int unsigned SAMPLE_HZ = 350_000,
  parameter logic [6:0]  CHANNEL   = 7'h1E     // result register of aux input 14
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  // converter side
  output logic        convst,
  input  logic        eoc,
  output logic        den,
  output logic [6:0]  daddr,
  input  logic        drdy,
  input  logic [15:0] do_i,
  // sample stream
  output logic        sample_valid,
  output logic [11:0] sample,
  output logic [15:0] missed
);

  localparam int unsigned DIV = CLK_HZ / SAMPLE_HZ;
  localparam int DW = $clog2(DIV);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_READ} state_e;
  state_e        state;
  logic [DW-1:0] div;
  logic          tick;

  assign tick  = enable && (div == DW'(DIV - 1));
  assign daddr = CHANNEL;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div          <= '0;
      state        <= S_IDLE;
      convst       <= 1'b0;
      den          <= 1'b0;
      sample_valid <= 1'b0;
      sample       <= '0;
      missed       <= '0;
    end else begin
      convst       <= 1'b0;
      den          <= 1'b0;
      sample_valid <= 1'b0;
      div <= (!enable || div == DW'(DIV - 1)) ? '0 : div + 1'b1;
      if (tick && state != S_IDLE && missed != '1) missed <= missed + 1'b1;
      unique case (state)
        S_IDLE: if (tick) begin
          convst <= 1'b1;
          state  <= S_CONV;
        end
        S_CONV: if (eoc) begin
          den   <= 1'b1;
          state <= S_READ;
        end
        S_READ: if (drdy) begin
          sample       <= do_i[15:4];
          sample_valid <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
