// bias_ctrl: static DAC settings of the SBC (biases and clock rails).
//
// Besides the parallel clocks, every analog level of the controller comes
// from a DAC programmed by the FPGA: the 17 bias outputs (12 unipolar, 4
// bipolar and one high-voltage negative bias), the two rail voltages of each
// of the 10 serial clocks (each serial clock driver switches between two
// DACs), and, in this design, the two rails of the high-voltage clock. These
// N_CH values change only when the host asks, so this block keeps a shadow
// register per channel and a pending flag per channel.
//
// A host write (`wr_en`, `wr_ch`, `wr_code`) updates the shadow register and
// marks the channel pending; `refresh` marks every channel pending (for
// instance after power-up of the analog supplies). A scanner sends pending
// channels, lowest number first, one SPI frame {ADDR_BASE+ch, code} each, and
// clears a flag when its frame has been taken; a write to a channel already
// being sent marks it pending again, so the DAC always ends with the last
// value. `busy` is high while anything is pending or being sent. Channel
// numbering and the shadow/pending scheme are this design's choices.
module bias_ctrl
  import idsac_pkg::*;
#(
  parameter int unsigned N_CH      = 39,
  parameter int unsigned CLK_DIV   = 4,
  parameter logic [7:0]  ADDR_BASE = 8'h00
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(N_CH)-1:0]     wr_ch,
  input  logic [15:0]                 wr_code,
  input  logic                        refresh,
  output logic [N_CH-1:0][15:0]       shadow,
  output logic                        busy,
  // DAC pins
  output logic                        sclk,
  output logic                        mosi,
  output logic                        cs_n
);
  localparam int unsigned CW = $clog2(N_CH);

  logic [N_CH-1:0] pending;
  logic            sending;
  logic            spi_ready, spi_done, spi_valid;
  dac_word_t       spi_word;

  // lowest pending channel
  logic          any_pend;
  logic [CW-1:0] first;
  always_comb begin
    any_pend = 1'b0;
    first    = '0;
    for (int i = N_CH - 1; i >= 0; i--) begin
      if (pending[i]) begin
        any_pend = 1'b1;
        first    = CW'(i);
      end
    end
  end

  assign spi_valid = any_pend && !sending;
  assign spi_word  = '{addr: ADDR_BASE + 8'(first), code: shadow[first]};
  assign busy      = any_pend || sending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow  <= '0;
      pending <= '0;
      sending <= 1'b0;
    end else begin
      if (spi_valid && spi_ready) begin
        sending        <= 1'b1;
        pending[first] <= 1'b0;
      end
      if (spi_done) sending <= 1'b0;
      if (refresh) pending <= '1;
      if (wr_en && 32'(wr_ch) < N_CH) begin
        shadow[wr_ch]  <= wr_code;
        pending[wr_ch] <= 1'b1;
      end
    end
  end

  spi_dac_master #(.CLK_DIV(CLK_DIV)) u_spi (
    .clk, .rst_n,
    .req_valid (spi_valid),
    .req_ready (spi_ready),
    .req       (spi_word),
    .done      (spi_done),
    .sclk, .mosi, .cs_n
  );

endmodule
