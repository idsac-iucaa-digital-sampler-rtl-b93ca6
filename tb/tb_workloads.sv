// tb_workloads: the SBC firmware run at the operating points the IDSAC
// characterisation used, at default parameters.
//
// Each case loads a pixel waveform for a given pixel period P (system clocks,
// including the one-clock gap between pixels) and n ADC samples per DCDS
// window, reads a small region of interest from the CCD output model and
// checks every pixel value and the pixel period:
//
//   500 kpixel/s, 3 samples   P = 320   (noise / bandwidth measurements)
//   350 kpixel/s, 3, 4, 5     P = 457   (160 MHz / 457 = 350.1 kpixel/s)
//   1 Mpixel/s, 3 samples     P = 160   (board-level DCDS figure)
//
// A last case reads one full 2048-column row of a 2048-column CCD with 50
// prescan and 16 overscan columns at 500 kpixel/s, i.e. one line of the
// spectrograph detector, with all four channels.
//
// Waveform entries: reset gate, settle, reference window (16n clocks), summing
// well dump, settle, signal window (16n clocks), remainder of the period.
module tb_workloads;
  import idsac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [15:0] host_rx_data = '0, host_tx_data;
  logic        host_rx_valid = 0, host_rx_ready, host_tx_valid, host_tx_ready = 0;
  logic [3:0]  adc_cnv, adc_sdata, adc_sframe;
  logic [9:0]  sclk_sw;
  logic        hv_clk, aaf_rst;
  logic        pdac_sclk, pdac_mosi, pdac_cs_n, pdac_ldac_n;
  logic        bdac_sclk, bdac_mosi, bdac_cs_n;
  logic        busy, frame_done, cmd_err, fifo_ovf, dcds_ovf, dac_busy;
  int checks = 0, failures = 0;

  idsac_sbc dut (.*);

  dac_model #(.N(16), .AUTO_LOAD(0)) pdac (.sclk(pdac_sclk), .mosi(pdac_mosi), .cs_n(pdac_cs_n), .ldac_n(pdac_ldac_n));
  dac_model #(.N(64), .AUTO_LOAD(1)) bdac (.sclk(bdac_sclk), .mosi(bdac_mosi), .cs_n(bdac_cs_n), .ldac_n(1'b1));

  // ---------------- CCD output model ----------------
  localparam int RESET_LVL = 40000;
  localparam int RG = 9, SW = 8;
  localparam int NPS = 3;
  logic [15:0] level [4];
  int ldacs = 0, ccd_row = -1, ccd_col = -1;
  logic rg_d = 0, sw_d = 0;

  function automatic int pixval(int ch, int r, int c);
    return (ch * 7919 + r * 1231 + c * 97) % 30000 + 100;
  endfunction

  always @(negedge pdac_ldac_n) begin
    ldacs++;
    if (ldacs % NPS == 0) begin ccd_row = ldacs / NPS - 1; ccd_col = -1; end
  end

  // mechanism counters
  int n_pix_clocked = 0, n_skip_row_pix = 0, n_skip_col_pix = 0, n_over_pix = 0;
  int n_rg_period_ok = 0, last_rg = -1, cyc = 0;
  int g_rows_skip = 0, g_cols_skip = 0, g_cols_read = 0;
  int period = 320;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rg_d <= sclk_sw[RG];
    sw_d <= sclk_sw[SW];
    if (sclk_sw[RG] && !rg_d) begin
      ccd_col++;
      n_pix_clocked++;
      if (ccd_row < g_rows_skip) n_skip_row_pix++;
      else if (ccd_col < g_cols_skip) n_skip_col_pix++;
      else if (ccd_col >= g_cols_skip + g_cols_read) n_over_pix++;
      if (last_rg >= 0 && ccd_col > 0) begin
        checks++;
        if (cyc - last_rg != period) begin failures++; $display("pixel period %0d", cyc - last_rg); end
        else n_rg_period_ok++;
      end
      last_rg = cyc;
      for (int ch = 0; ch < 4; ch++) level[ch] <= 16'(RESET_LVL);
    end
    if (sclk_sw[SW] && !sw_d)
      for (int ch = 0; ch < 4; ch++) level[ch] <= 16'(RESET_LVL - pixval(ch, ccd_row, ccd_col));
  end

  for (genvar ch = 0; ch < 4; ch++) begin : g_adc
    adc_model adc (.clk, .cnv(adc_cnv[ch]), .level(level[ch]), .sdata(adc_sdata[ch]), .sframe(adc_sframe[ch]));
  end

  // ---------------- host link ----------------
  task automatic word(input logic [15:0] w);
    @(negedge clk);
    host_rx_data = w; host_rx_valid = 1;
    @(negedge clk);
    while (!host_rx_ready) @(negedge clk);
    host_rx_valid = 0;
  endtask

  task automatic cmd(input opcode_e op, input logic [11:0] a, input logic [15:0] d);
    word({op, a});
    word(d);
  endtask

  logic [15:0] rxq [$];
  bit          rand_stall = 1;
  int          n_stalls = 0;
  always @(negedge clk) host_tx_ready <= rand_stall ? ($urandom_range(0, 3) != 0) : host_tx_ready;
  always @(posedge clk) if (rst_n) begin
    if (host_tx_valid && host_tx_ready) rxq.push_back(host_tx_data);
    if (host_tx_valid && !host_tx_ready) n_stalls++;
  end

  // parallel DAC: after each LDAC the outputs must be the requested codes
  logic [15:0] pcode [10][3];
  logic [1:0]  plev [NPS][10];
  int n_ldac_ok = 0, n_mid = 0, n_partial = 0, frames_at_ldac = 0;
  always @(posedge pdac_ldac_n) if (rst_n) begin
    int s;
    #1;
    s = (ldacs - 1) % NPS;
    checks++;
    for (int c = 0; c < 10; c++) begin
      if (pdac.out_reg[c] !== pcode[c][plev[s][c]]) begin
        failures++; $display("parallel clock %0d state %0d: %h exp %h", c, s, pdac.out_reg[c], pcode[c][plev[s][c]]);
        break;
      end
      if (plev[s][c] == LVL_MID) n_mid++;
    end
    n_ldac_ok++;
    if (pdac.frames - frames_at_ldac < 10) n_partial++;
    frames_at_ldac = pdac.frames;
  end

  task automatic set_geom(input int rs, input int rr, input int cs, input int cr, input int co);
    cmd(OP_WRITE, RA_GEOM_BASE + 0, 16'(rs));
    cmd(OP_WRITE, RA_GEOM_BASE + 1, 16'(rr));
    cmd(OP_WRITE, RA_GEOM_BASE + 2, 16'(cs));
    cmd(OP_WRITE, RA_GEOM_BASE + 3, 16'(cr));
    cmd(OP_WRITE, RA_GEOM_BASE + 4, 16'(co));
    g_rows_skip = rs; g_cols_skip = cs; g_cols_read = cr;
  endtask

  task automatic run_frame();
    ldacs = 0; ccd_row = -1; ccd_col = -1; last_rg = -1;
    cmd(OP_START, 0, 0);
    wait (frame_done);
    repeat (200) @(negedge clk);
  endtask

  // pixel waveform for period p and n samples per window; o = settle time
  task automatic load_wave(input int p, input int n, input int o);
    int          d [7];
    logic [15:0] b [7] = '{16'h0A01, 16'h0001, 16'h1001, 16'h0102, 16'h0002, 16'h2004, 16'h0404};
    d = '{o, o, 16 * n, o + o / 2, o, 16 * n, 0};
    d[6] = p - 1 - (d[0] + d[1] + d[2] + d[3] + d[4] + d[5]);
    for (int i = 0; i < 7; i++) begin
      cmd(OP_WRITE, RA_WF_BASE + 12'(2 * i), 16'(d[i] - 1));
      cmd(OP_WRITE, RA_WF_BASE + 12'(2 * i + 1), b[i]);
    end
    period = p;
  endtask

  int n_cases = 0;
  task automatic run_case(input string name, input int p, input int n, input int o,
                          input int rs, input int rr, input int cs, input int cr, input int co);
    int k = 0, bad = 0, rg0;
    load_wave(p, n, o);
    set_geom(rs, rr, cs, cr, co);
    rxq.delete();
    rg0 = n_rg_period_ok;
    run_frame();
    repeat (400) @(negedge clk);
    checks++;
    if (rxq.size() != rr * (cr + co) * 4) begin
      failures++; $display("%s: %0d words, exp %0d", name, rxq.size(), rr * (cr + co) * 4);
    end
    for (int r = rs; r < rs + rr; r++) for (int c = cs; c < cs + cr + co; c++) for (int ch = 0; ch < 4; ch++) begin
      if (k >= rxq.size() || rxq[k] !== 16'(pixval(ch, r, c))) bad++;
      k++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d wrong pixels", name, bad); end
    checks++;
    if (n_rg_period_ok == rg0) begin failures++; $display("%s: period never checked", name); end
    $display("case %-28s period %0d clocks (%0d pixel/s at 160 MHz), %0d samples/window, %0d words: %s",
             name, p, 160000000 / p, n, rxq.size(), bad == 0 ? "ok" : "FAIL");
    n_cases++;
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    cmd(OP_WRITE, RA_GEOM_BASE + 5, 16'(NPS));
    cmd(OP_WRITE, RA_GEOM_BASE + 6, 16'd7);
    cmd(OP_WRITE, RA_GEOM_BASE + 7, 16'h0001);
    plev[0] = '{2, 1, 0, 0, 0, 0, 0, 0, 0, 0};
    plev[1] = '{0, 2, 1, 0, 0, 0, 0, 0, 0, 0};
    plev[2] = '{1, 0, 2, 2, 0, 0, 0, 0, 0, 0};
    for (int s = 0; s < NPS; s++) begin
      logic [19:0] lv;
      for (int c = 0; c < 10; c++) lv[2 * c +: 2] = plev[s][c];
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s), lv[15:0]);
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s + 1), {12'h0, lv[19:16]});
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s + 2), 16'd10);
    end
    for (int c = 0; c < 10; c++) for (int l = 0; l < 3; l++) begin
      pcode[c][l] = 16'(1000 * (l + 1) + c);
      cmd(OP_WRITE, RA_PCODE_BASE + 12'(4 * c + l), pcode[c][l]);
    end
    run_case("500 kpix/s, 3 samples",      320, 3, 32, 1, 2, 2, 4, 2);
    run_case("350 kpix/s, 3 samples",      457, 3, 32, 1, 2, 2, 4, 2);
    run_case("350 kpix/s, 4 samples",      457, 4, 32, 1, 2, 2, 4, 2);
    run_case("350 kpix/s, 5 samples",      457, 5, 32, 1, 2, 2, 4, 2);
    run_case("1 Mpix/s, 3 samples",        160, 3, 8,  1, 2, 2, 4, 2);
    run_case("2048-column row, 500 kpix/s", 320, 3, 32, 0, 1, 50, 2048, 16);
    checks++;
    if (n_cases != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
