// tb_idsac_sbc: end-to-end test of the SBC firmware at its default parameters.
//
// The host side sends the whole configuration as commands: a 7-entry pixel
// waveform of 319 clocks (320 with the gap: 0.5 Mpixel/s per channel at
// 160 MHz, 3 ADC samples per DCDS window), three tri-level parallel states,
// level codes, frame geometry and bias values. A CCD output model per
// channel drives the four ADC models: after each reset-gate pulse the video
// level is RESET_LVL, and when the summing well opens it drops by the pixel's
// charge v(ch,row,col). Rows are counted from the parallel DAC's LDAC
// strobes, columns from reset-gate pulses, so the expected image is known
// independently of the design.
//
// Checked: the host receives exactly v(ch,row,col) for the region of
// interest (rows >= rows_skip, columns >= cols_skip incl. overscan), in
// order ch0..ch3 per pixel; the pixel period is 320 clocks; the parallel DAC
// outputs after each LDAC equal the requested tri-level codes; bias DACs
// hold what was written and a refresh resends all 39 channels; a bad command
// raises cmd_err; abort stops a frame; a frame the host does not read
// overflows the output FIFO and raises fifo_ovf. Each of these mechanisms is
// counted and a mechanism that never happened is a failure.
module tb_idsac_sbc;
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
        if (cyc - last_rg != 320) begin failures++; $display("pixel period %0d", cyc - last_rg); end
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

  int n_err = 0, n_aborts = 0, n_ovf = 0, n_refresh = 0, n_words_ok = 0;
  always @(posedge clk) if (rst_n && cmd_err) n_err++;

  initial begin
    // pixel waveform: {dur, bits}; bits 0-2 serial phases, 8 SW, 9 RG,
    // 10 HV clock, 11 filter reset, 12 reference window, 13 signal window
    int          durs [7] = '{31, 31, 47, 47, 31, 47, 78};
    logic [15:0] bits [7] = '{16'h0A01, 16'h0001, 16'h1001, 16'h0102, 16'h0002, 16'h2004, 16'h0404};
    logic [15:0] bias [39];
    int rs, rr, cs, cr, co;

    repeat (5) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      cmd(OP_WRITE, RA_WF_BASE + 12'(2 * i), 16'(durs[i]));
      cmd(OP_WRITE, RA_WF_BASE + 12'(2 * i + 1), bits[i]);
    end
    cmd(OP_WRITE, RA_GEOM_BASE + 5, 16'(NPS));
    cmd(OP_WRITE, RA_GEOM_BASE + 6, 16'd7);
    cmd(OP_WRITE, RA_GEOM_BASE + 7, 16'h0001);
    // three-phase image clocks 0-2 and transfer gate 3, with a mid level
    plev[0] = '{2, 1, 0, 0, 0, 0, 0, 0, 0, 0};
    plev[1] = '{0, 2, 1, 0, 0, 0, 0, 0, 0, 0};
    plev[2] = '{1, 0, 2, 2, 0, 0, 0, 0, 0, 0};
    for (int s = 0; s < NPS; s++) begin
      logic [19:0] lv;
      for (int c = 0; c < 10; c++) lv[2 * c +: 2] = plev[s][c];
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s), lv[15:0]);
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s + 1), {12'h0, lv[19:16]});
      cmd(OP_WRITE, RA_PS_BASE + 12'(4 * s + 2), 16'(20 - 5 * s));
    end
    for (int c = 0; c < 10; c++) for (int l = 0; l < 3; l++) begin
      pcode[c][l] = 16'(1000 * (l + 1) + c);
      cmd(OP_WRITE, RA_PCODE_BASE + 12'(4 * c + l), pcode[c][l]);
    end

    // biases and clock rails
    for (int k = 0; k < 39; k++) begin
      bias[k] = 16'(30000 + 37 * k);
      cmd(OP_WRITE, RA_STAT_BASE + 12'(k), bias[k]);
    end
    wait (!dac_busy);
    repeat (10) @(negedge clk);
    checks++;
    for (int k = 0; k < 39; k++) if (bdac.out_reg[k] !== bias[k]) begin
      failures++; $display("bias %0d: %h exp %h", k, bdac.out_reg[k], bias[k]); break;
    end
    begin
      int f0;
      f0 = bdac.frames;
      cmd(OP_REFRESH, 0, 0);
      @(negedge clk);
      wait (!dac_busy);
      repeat (10) @(negedge clk);
      checks++;
      if (bdac.frames - f0 != 39) begin failures++; $display("refresh sent %0d", bdac.frames - f0); end
      else n_refresh++;
    end

    // ---- frame 1: region of interest with prescan skip and overscan ----
    rs = 1; rr = 3; cs = 2; cr = 4; co = 2;
    set_geom(rs, rr, cs, cr, co);
    run_frame();
    begin
      int n = 0;
      checks++;
      if (rxq.size() != rr * (cr + co) * 4) begin
        failures++; $display("frame 1: %0d words, exp %0d", rxq.size(), rr * (cr + co) * 4);
      end
      for (int r = rs; r < rs + rr; r++) for (int c = cs; c < cs + cr + co; c++) for (int ch = 0; ch < 4; ch++) begin
        checks++;
        if (n >= rxq.size() || rxq[n] !== 16'(pixval(ch, r, c))) begin
          failures++;
          if (n < rxq.size()) $display("row %0d col %0d ch %0d: %0d exp %0d", r, c, ch, rxq[n], pixval(ch, r, c));
        end else n_words_ok++;
        n++;
      end
      rxq.delete();
    end

    // ---- bad command ----
    cmd(OP_WRITE, 12'h3FF, 16'h0);
    repeat (3) @(negedge clk);

    // ---- abort in mid-frame ----
    set_geom(0, 20, 0, 20, 0);
    ldacs = 0; ccd_row = -1; ccd_col = -1; last_rg = -1;
    cmd(OP_START, 0, 0);
    repeat (8000) @(negedge clk);
    cmd(OP_ABORT, 0, 0);
    repeat (2) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after abort"); end
    else n_aborts++;
    repeat (1000) @(negedge clk);
    rxq.delete();

    // ---- frame the host does not read: FIFO overflow ----
    rand_stall = 0;
    @(negedge clk);
    host_tx_ready = 0;
    set_geom(0, 2, 0, 130, 0);
    run_frame();
    checks++;
    if (!fifo_ovf) begin failures++; $display("no FIFO overflow"); end
    else n_ovf++;
    host_tx_ready = 1;
    repeat (1100) @(negedge clk);
    rxq.delete();

    // ---- every mechanism must have happened ----
    begin
      int m [string];
      m["skipped-row pixels"]  = n_skip_row_pix;
      m["skipped columns"]     = n_skip_col_pix;
      m["overscan pixels"]     = n_over_pix;
      m["320-clock pixels"]    = n_rg_period_ok;
      m["LDAC updates"]        = n_ldac_ok;
      m["mid (tri-level)"]     = n_mid;
      m["partial DAC loads"]   = n_partial;
      m["host stalls"]         = n_stalls;
      m["bias refresh"]        = n_refresh;
      m["command errors"]      = n_err;
      m["aborts"]              = n_aborts;
      m["FIFO overflows"]      = n_ovf;
      m["image words checked"] = n_words_ok;
      foreach (m[k]) begin
        $display("mechanism %-20s %0d", k, m[k]);
        checks++;
        if (m[k] == 0) begin failures++; $display("mechanism never happened: %s", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
