// adc_model: behavioural model of one 16-bit serial video ADC (testbench only).
//
// At every clock edge on which `cnv` is high it takes `level` as the new
// conversion result and starts sending the previous result: `sframe` high
// with the MSB in the next clock, then one bit per clock, MSB first. This is
// the pipeline latency of one conversion that adc_serial_rx expects with
// LATENCY = 1. Not synthesizable in intent; no analog behaviour is modelled.
module adc_model (
  input  logic        clk,
  input  logic        cnv,
  input  logic [15:0] level,
  output logic        sdata,
  output logic        sframe
);
  logic [15:0] held = '0;
  logic [15:0] out  = '0;
  int          nb   = 0;

  always @(posedge clk) begin
    if (cnv) begin
      out  <= held;
      held <= level;
      nb   <= 16;
    end else if (nb != 0) begin
      out <= out << 1;
      nb  <= nb - 1;
    end
  end

  assign sdata  = (nb != 0) ? out[15] : 1'b0;
  assign sframe = (nb == 16);
endmodule
