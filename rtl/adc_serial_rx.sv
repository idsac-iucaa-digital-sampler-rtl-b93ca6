// adc_serial_rx: conversion strobe and serial word receiver for one video ADC.
//
// The SBC reads a 16-bit serial (LVDS) ADC per video channel at 10 MSPS. This
// block issues the ADC's conversion strobe `cnv`, one clock wide, every
// CLK_PER_SAMPLE system clocks, and deserialises the words the ADC sends back.
// The ADC is assumed to send one bit per system clock, MSB first, with a frame
// marker `sframe` high during the MSB, and to send the result of conversion k
// in the frame that follows conversion k+LATENCY (LATENCY=1: the word of a
// conversion is sent right after the next strobe).
//
// Each word carries a tag: the value of `tag_in` at the strobe that started
// its conversion. The DCDS windows from the pixel timing are passed as the
// tag, so a sample is filed as reference or signal by the time it was taken,
// whatever the ADC's pipeline delay.
//
// Timing: `word_valid` pulses one clock after the word's last bit. The serial
// format, the clock ratio and the latency are this design's assumptions; the
// 16-bit width and 10 MSPS rate are the controller's.
module adc_serial_rx #(
  parameter int unsigned ADC_BITS       = 16,
  parameter int unsigned CLK_PER_SAMPLE = 16,
  parameter int unsigned LATENCY        = 1,
  parameter int unsigned TAG_BITS       = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // to the ADC
  output logic                 cnv,
  // from the ADC
  input  logic                 sdata,
  input  logic                 sframe,
  // tag sampled with each conversion
  input  logic [TAG_BITS-1:0]  tag_in,
  // received words
  output logic [ADC_BITS-1:0]  word,
  output logic [TAG_BITS-1:0]  word_tag,
  output logic                 word_valid
);
  localparam int unsigned CW = $clog2(CLK_PER_SAMPLE);
  localparam int unsigned BW = $clog2(ADC_BITS + 1);

  logic [CW-1:0]           div_cnt;
  logic [TAG_BITS-1:0]     tag_pipe [LATENCY+1];
  logic [ADC_BITS-1:0]     shreg;
  logic [BW-1:0]           nbits;      // bits still to receive in this frame
  logic [TAG_BITS-1:0]     frame_tag;

  // Conversion strobe divider.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      cnv     <= 1'b0;
    end else begin
      cnv <= (div_cnt == CW'(CLK_PER_SAMPLE - 1));
      if (div_cnt == CW'(CLK_PER_SAMPLE - 1)) div_cnt <= '0;
      else                                    div_cnt <= div_cnt + 1'b1;
    end
  end

  // Tags of the conversions still in the ADC pipeline.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= LATENCY; i++) tag_pipe[i] <= '0;
    end else if (cnv) begin
      tag_pipe[0] <= tag_in;
      for (int i = 1; i <= LATENCY; i++) tag_pipe[i] <= tag_pipe[i-1];
    end
  end

  // Deserialiser.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg      <= '0;
      nbits      <= '0;
      frame_tag  <= '0;
      word       <= '0;
      word_tag   <= '0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= 1'b0;
      if (sframe) begin
        shreg     <= {{(ADC_BITS-1){1'b0}}, sdata};
        nbits     <= BW'(ADC_BITS - 1);
        frame_tag <= tag_pipe[LATENCY];
      end else if (nbits != '0) begin
        shreg <= {shreg[ADC_BITS-2:0], sdata};
        nbits <= nbits - 1'b1;
        if (nbits == BW'(1)) begin
          word       <= {shreg[ADC_BITS-2:0], sdata};
          word_tag   <= frame_tag;
          word_valid <= 1'b1;
        end
      end
    end
  end

endmodule
