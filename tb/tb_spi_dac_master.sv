// tb_spi_dac_master: checks the DAC serial write port against dac_model.
//
// Random {address, code} frames are sent back to back and with gaps. The DAC
// model must receive each frame intact (24 bits, right channel and code),
// SCLK must be low whenever CS_N changes, and back-to-back frames must start
// every (2*24+2)*CLK_DIV+1 clocks.
module tb_spi_dac_master;
  import idsac_pkg::*;
  localparam int DIV = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic      req_valid = 0, req_ready, done, sclk, mosi, cs_n;
  dac_word_t req;
  int checks = 0, failures = 0;

  spi_dac_master #(.CLK_DIV(DIV)) dut (.*);
  dac_model #(.N(256), .AUTO_LOAD(1)) dac (.sclk, .mosi, .cs_n, .ldac_n(1'b1));

  // SCLK idles low around chip-select edges
  logic cs_d = 1;
  always @(posedge clk) begin
    cs_d <= cs_n;
    if (rst_n && cs_d != cs_n) begin
      checks++;
      if (sclk) begin failures++; $display("sclk high at cs edge"); end
    end
  end

  int cyc = 0, last_acc = -1;
  int gaps [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req_valid && req_ready) begin
      if (last_acc >= 0) gaps.push_back(cyc - last_acc);
      last_acc = cyc;
    end
  end

  task automatic send(input logic [7:0] a, input logic [15:0] c, input bit unused_b2b);
    int f0;
    f0 = dac.frames;
    @(negedge clk);
    req_valid = 1; req = '{addr: a, code: c};
    forever begin
      bit was_ready;
      was_ready = req_ready;
      @(negedge clk);
      if (was_ready) break;
    end
    req_valid = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (dac.frames != f0 + 1 || dac.in_reg[a] !== c || dac.bad_frames != 0) begin
      failures++;
      $display("frame %h:%h -> reg %h frames %0d bad %0d", a, c, dac.in_reg[a], dac.frames, dac.bad_frames);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      send(8'($urandom), 16'($urandom), 1'b0);
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    // back-to-back: keep valid high for 5 frames
    gaps.delete();
    last_acc = -1;
    @(negedge clk);
    req_valid = 1; req = '{addr: 8'h11, code: 16'hBEEF};
    repeat (5) begin
      @(posedge clk);
      while (!req_ready) @(posedge clk);
    end
    @(negedge clk);
    req_valid = 0;
    wait (!cs_n); wait (cs_n);
    foreach (gaps[i]) begin
      checks++;
      if (gaps[i] != (2 * 24 + 2) * DIV + 1) begin failures++; $display("frame period %0d", gaps[i]); end
    end
    checks++;
    if (gaps.size() < 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
