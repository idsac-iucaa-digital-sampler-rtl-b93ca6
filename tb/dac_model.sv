// dac_model: behavioural model of a multi-channel SPI DAC with LDAC (testbench only).
//
// Frames of 24 bits {address[7:0], code[15:0]} are shifted in on SCLK rising
// edges while CS_N is low and written to the input register of that channel
// when CS_N rises. With AUTO_LOAD the outputs follow at once; otherwise all
// outputs take the input registers together on a falling edge of LDAC_N.
// `frames` counts complete frames and `bad_frames` those not 24 bits long.
module dac_model #(
  parameter int unsigned N     = 64,
  parameter bit          AUTO_LOAD = 1'b1
) (
  input  logic sclk,
  input  logic mosi,
  input  logic cs_n,
  input  logic ldac_n
);
  logic [15:0] in_reg  [N];
  logic [15:0] out_reg [N];
  logic [23:0] sh;
  int          nbits;
  int          frames     = 0;
  int          bad_frames = 0;
  int          last_addr  = -1;

  initial begin
    for (int i = 0; i < N; i++) begin
      in_reg[i]  = '0;
      out_reg[i] = '0;
    end
    nbits = 0;
  end

  always @(posedge sclk) if (!cs_n) begin
    sh    = {sh[22:0], mosi};
    nbits = nbits + 1;
  end

  always @(negedge cs_n) nbits = 0;

  always @(posedge cs_n) begin
    if (nbits == 24 && sh[23:16] < N) begin
      in_reg[sh[23:16]] = sh[15:0];
      if (AUTO_LOAD) out_reg[sh[23:16]] = sh[15:0];
      frames    = frames + 1;
      last_addr = sh[23:16];
    end else begin
      bad_frames = bad_frames + 1;
    end
  end

  always @(negedge ldac_n) if (!AUTO_LOAD) begin
    for (int i = 0; i < N; i++) out_reg[i] = in_reg[i];
  end
endmodule
