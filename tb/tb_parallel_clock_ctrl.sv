// tb_parallel_clock_ctrl: checks tri-level parallel clocking through the DAC.
//
// Random level codes are set per clock and level, then a sequence of random
// tri-level states is requested. After each `done` the DAC model's outputs
// must equal the code of each clock's requested level; before LDAC the
// outputs must still show the previous state (preloading must not move
// them); only the channels whose level changed may be written (all of them
// for the first request). LDAC must be low for exactly LDAC_W clocks.
module tb_parallel_clock_ctrl;
  import idsac_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [N-1:0][2:0][15:0] codes;
  logic                    req_valid = 0, req_ready, done, sclk, mosi, cs_n, ldac_n;
  logic [N-1:0][1:0]       req_levels, cur_levels, prev;
  int checks = 0, failures = 0;

  parallel_clock_ctrl #(.N_PAR(N), .CLK_DIV(2), .LDAC_W(4)) dut (.*);
  dac_model #(.N(16), .AUTO_LOAD(0)) dac (.sclk, .mosi, .cs_n, .ldac_n);

  function automatic logic [15:0] code_of(int c, logic [1:0] l);
    return codes[c][(l == 3) ? 2 : l];
  endfunction

  int ldac_low = 0, ldac_pulses = 0;
  always @(posedge clk) begin
    if (!ldac_n) ldac_low++;
    else if (ldac_low != 0) begin
      checks++;
      if (ldac_low != 4) begin failures++; $display("ldac width %0d", ldac_low); end
      ldac_low = 0;
      ldac_pulses++;
    end
  end

  initial begin
    for (int c = 0; c < N; c++) for (int l = 0; l < 3; l++) codes[c][l] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      int f0, nchg;
      logic [N-1:0][1:0] lv;
      for (int c = 0; c < N; c++) lv[c] = ($urandom_range(0, 2) == 0) ? 2'($urandom_range(0, 3)) : (r == 0 ? 2'd0 : prev[c]);
      nchg = 0;
      for (int c = 0; c < N; c++) if (r == 0 || lv[c] != prev[c]) nchg++;
      f0 = dac.frames;
      @(negedge clk);
      req_valid = 1; req_levels = lv;
      @(negedge clk);
      req_valid = 0;
      // outputs must not move while the DAC is being preloaded
      while (ldac_n) begin
        if (r > 0) begin
          checks++;
          for (int c = 0; c < N; c++) if (dac.out_reg[c] !== code_of(c, prev[c])) begin
            failures++; $display("round %0d: output %0d moved before LDAC", r, c); break;
          end
        end
        @(negedge clk);
      end
      wait (done);
      @(negedge clk);
      checks++;
      for (int c = 0; c < N; c++) if (dac.out_reg[c] !== code_of(c, lv[c])) begin
        failures++; $display("round %0d: clock %0d out %h exp %h", r, c, dac.out_reg[c], code_of(c, lv[c]));
      end
      checks++;
      if (dac.frames - f0 != nchg || cur_levels != lv) begin
        failures++; $display("round %0d: %0d frames for %0d changes", r, dac.frames - f0, nchg);
      end
      prev = lv;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (ldac_pulses != 30) begin failures++; $display("%0d LDAC pulses", ldac_pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
