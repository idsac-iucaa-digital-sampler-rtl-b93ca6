// idsac_sbc: FPGA master controller of one IDSAC Single Board Controller.
//
// One SBC runs one CCD with up to four outputs. Its FPGA generates the
// readout clocks, reads the four video ADCs, performs digital correlated
// double sampling (DCDS), programs the clock and bias DACs and talks to the
// host over a USB 2.0 controller chip. This module is that firmware:
//
//   host words -> cmd_decoder -> configuration, start/abort, DAC writes
//   readout_seq  drives  parallel_clock_ctrl (10 tri-level clocks via DAC+LDAC)
//                and     waveform_gen (per-pixel timing: 10 serial clocks,
//                        HV clock, filter reset, DCDS windows)
//   4 x (adc_serial_rx -> dcds) -> pixel_packer (FIFO) -> host words
//   bias_ctrl    writes biases and serial/HV clock rails on its own DAC bus
//
// The DCDS windows from the waveform table go to each ADC receiver as the
// tag of the conversion, so every sample is filed as reference or signal by
// the moment it was taken. At the default 160 MHz system clock the ADCs
// convert at 10 MSPS (one serial bit per clock); a waveform table of 319
// clocks plus the one-clock gap between pixels gives 320 clocks per pixel,
// i.e. 0.5 Mpixel/s per channel, 20 ADC samples per pixel of which the
// window lengths choose 3 (or 4, 5, ...) per level.
//
// Ports are plain pins: the USB controller's FPGA side is taken as a 16-bit
// valid/ready word stream in each direction; ADC, DAC and clock-driver pins
// go to the analog parts of the board. The block structure follows the
// controller's description; all interface formats, the command set and the
// sequencing details are this design's choices (see each block).
module idsac_sbc
  import idsac_pkg::*;
#(
  parameter int unsigned N_CH           = 4,
  parameter int unsigned ADC_DIV        = 16,
  parameter int unsigned ADC_LATENCY    = 1,
  parameter int unsigned SPI_DIV        = 4,
  parameter int unsigned FIFO_DEPTH     = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host link (USB controller, FPGA side)
  input  logic [15:0]                host_rx_data,
  input  logic                       host_rx_valid,
  output logic                       host_rx_ready,
  output logic [15:0]                host_tx_data,
  output logic                       host_tx_valid,
  input  logic                       host_tx_ready,
  // video ADCs
  output logic [N_CH-1:0]            adc_cnv,
  input  logic [N_CH-1:0]            adc_sdata,
  input  logic [N_CH-1:0]            adc_sframe,
  // serial clock driver switch controls, HV clock, filter reset switch
  output logic [SBC_SERIAL_CLOCKS-1:0] sclk_sw,
  output logic                       hv_clk,
  output logic                       aaf_rst,
  // parallel clock DAC
  output logic                       pdac_sclk,
  output logic                       pdac_mosi,
  output logic                       pdac_cs_n,
  output logic                       pdac_ldac_n,
  // bias and clock-rail DACs
  output logic                       bdac_sclk,
  output logic                       bdac_mosi,
  output logic                       bdac_cs_n,
  // status
  output logic                       busy,
  output logic                       frame_done,
  output logic                       cmd_err,
  output logic                       fifo_ovf,
  output logic                       dcds_ovf,
  output logic                       dac_busy
);
  localparam int unsigned N_WF = SBC_WF_ENTRIES;
  localparam int unsigned N_PS = SBC_PSTATES;
  localparam int unsigned N_PC = SBC_PAR_CLOCKS;
  localparam int unsigned N_ST = SBC_STATIC_DACS;

  // configuration
  logic                        wf_wr_en;
  logic [$clog2(N_WF)-1:0]     wf_wr_addr;
  wf_entry_t                   wf_wr_data;
  geom_t                       geom;
  pstate_t                     pstates [N_PS];
  logic [N_PC-1:0][2:0][15:0]  pcodes;
  logic                        stat_wr_en;
  logic [$clog2(N_ST)-1:0]     stat_wr_ch;
  logic [15:0]                 stat_wr_code;
  logic                        start, abort, refresh;

  cmd_decoder #(.N_WF(N_WF), .N_PSTATES(N_PS), .N_PAR(N_PC), .N_STATIC(N_ST)) u_cmd (
    .clk, .rst_n,
    .rx_data (host_rx_data), .rx_valid (host_rx_valid), .rx_ready (host_rx_ready),
    .wf_wr_en, .wf_wr_addr, .wf_wr_data,
    .geom, .pstates, .pcodes,
    .stat_wr_en, .stat_wr_ch, .stat_wr_code,
    .start, .abort, .refresh, .cmd_err
  );

  // sequencing
  logic       par_req_valid, par_req_ready, par_done;
  par_state_t par_req_levels, par_cur;
  logic       wf_start, wf_sample_en, wf_done, wf_busy;
  wf_bits_t   wf_out;
  logic [16:0] row, col;

  readout_seq #(.N_PSTATES(N_PS)) u_seq (
    .clk, .rst_n,
    .start, .abort, .geom, .pstates,
    .par_req_valid, .par_req_ready, .par_req_levels, .par_done,
    .wf_start, .wf_sample_en, .wf_done,
    .busy, .frame_done, .row, .col
  );

  parallel_clock_ctrl #(.N_PAR(N_PC), .CLK_DIV(SPI_DIV)) u_par (
    .clk, .rst_n,
    .codes      (pcodes),
    .req_valid  (par_req_valid),
    .req_ready  (par_req_ready),
    .req_levels (par_req_levels),
    .done       (par_done),
    .cur_levels (par_cur),
    .sclk (pdac_sclk), .mosi (pdac_mosi), .cs_n (pdac_cs_n), .ldac_n (pdac_ldac_n)
  );

  waveform_gen #(.N_ENTRIES(N_WF)) u_wf (
    .clk, .rst_n,
    .wr_en (wf_wr_en), .wr_addr (wf_wr_addr), .wr_data (wf_wr_data),
    .n_entries (geom.n_wf), .idle_bits (geom.idle_bits),
    .start (wf_start), .sample_en (wf_sample_en),
    .busy (wf_busy), .done (wf_done),
    .wf_out
  );

  assign sclk_sw = wf_out[SBC_SERIAL_CLOCKS-1:0];
  assign hv_clk  = wf_out[WB_HV];
  assign aaf_rst = wf_out[WB_AAF];

  bias_ctrl #(.N_CH(N_ST), .CLK_DIV(SPI_DIV)) u_bias (
    .clk, .rst_n,
    .wr_en (stat_wr_en), .wr_ch (stat_wr_ch), .wr_code (stat_wr_code),
    .refresh,
    .shadow (),
    .busy (dac_busy),
    .sclk (bdac_sclk), .mosi (bdac_mosi), .cs_n (bdac_cs_n)
  );

  // video channels
  logic [N_CH-1:0][15:0] pix_data;
  logic [N_CH-1:0]       pix_valid, ch_ovf;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [15:0] w;
    logic [1:0]  wtag;
    logic        wvalid;

    adc_serial_rx #(.ADC_BITS(16), .CLK_PER_SAMPLE(ADC_DIV),
                    .LATENCY(ADC_LATENCY), .TAG_BITS(2)) u_rx (
      .clk, .rst_n,
      .cnv (adc_cnv[c]),
      .sdata (adc_sdata[c]), .sframe (adc_sframe[c]),
      .tag_in ({wf_out[WB_SIG], wf_out[WB_REF]}),
      .word (w), .word_tag (wtag), .word_valid (wvalid)
    );

    dcds #(.ADC_BITS(16), .MAX_SAMP(15)) u_dcds (
      .clk, .rst_n,
      .s_data (w), .s_tag (wtag), .s_valid (wvalid),
      .pix_data (pix_data[c]), .pix_valid (pix_valid[c]), .ovf (ch_ovf[c])
    );
  end

  // sticky DCDS overflow, cleared by a new frame start
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          dcds_ovf <= 1'b0;
    else if (start)      dcds_ovf <= 1'b0;
    else if (|ch_ovf)    dcds_ovf <= 1'b1;
  end

  pixel_packer #(.N_CH(N_CH), .WIDTH(16), .FIFO_DEPTH(FIFO_DEPTH)) u_pack (
    .clk, .rst_n,
    .clr (start),
    .pix_data, .pix_valid,
    .out_data (host_tx_data), .out_valid (host_tx_valid), .out_ready (host_tx_ready),
    .ovf (fifo_ovf),
    .level ()
  );

endmodule
