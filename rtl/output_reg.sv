// output_reg: the macro's 256 x 8b dual-control output registers.
//
// Each register is a master latch written bit by bit by its column's SAR
// (bit b takes the SA decision d_adc at the timing edge where CS_SAR[b] is
// active; CS_ADC clears it at the start of a conversion) and a slave stage
// updated from the master by a CS_out pulse at a system clock edge. Because
// the two stages have separate controls, the next conversion can be written
// into the masters while the slaves still present the previous result to the
// store stage; dout changes only at the CS_out edge. The separate
// master/slave controls are the published scheme; here they are two flop
// stages on the timing clock and the system clock.
//
// From the published design: separate master (SAR) and slave (CS_out)
// controls so that a conversion overlaps the transfer of the previous result.
// Own choice: flip-flops in place of latches.
module output_reg
  import imagine_pkg::*;
#(
  parameter int unsigned COLS = N_COLS
) (
  input  logic             clk_tg,
  input  ctl_t             ctl,
  input  logic [COLS-1:0]  d_adc,
  input  logic             clk,
  input  logic             cs_out,
  output logic [7:0]       dout [COLS]
);
  logic [7:0] master [COLS];

  always_ff @(posedge clk_tg) begin
    for (int j = 0; j < COLS; j++) begin
      if (ctl.cs_adc) master[j] <= '0;
      else
        for (int b = 0; b < 8; b++)
          if (ctl.cs_sar[b]) master[j][b] <= d_adc[j];
    end
  end

  always_ff @(posedge clk) if (cs_out) dout <= master;
endmodule
