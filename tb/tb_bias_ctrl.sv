// tb_bias_ctrl: checks static DAC programming (biases and clock rails).
//
// Random channel writes, bursts of writes faster than the DAC port, a
// rewrite of a channel while it is being sent, and a refresh are applied.
// Whenever `busy` falls the DAC model's registers must equal the values
// written here for every channel, and a refresh must send exactly N_CH
// frames in ascending address order.
module tb_bias_ctrl;
  import idsac_pkg::*;
  localparam int N = 39;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              wr_en = 0, refresh = 0, busy, sclk, mosi, cs_n;
  logic [5:0]        wr_ch;
  logic [15:0]       wr_code;
  logic [N-1:0][15:0] shadow;
  logic [15:0]       ref_val [N];
  int checks = 0, failures = 0;

  bias_ctrl #(.N_CH(N), .CLK_DIV(2), .ADDR_BASE(8'h20)) dut (.*);
  dac_model #(.N(128), .AUTO_LOAD(1)) dac (.sclk, .mosi, .cs_n, .ldac_n(1'b1));

  task automatic wr(input int ch, input logic [15:0] v);
    @(negedge clk);
    wr_en = 1; wr_ch = 6'(ch); wr_code = v;
    @(negedge clk);
    wr_en = 0;
    ref_val[ch] = v;
  endtask

  task automatic settle_and_check(input string what);
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    for (int c = 0; c < N; c++) if (dac.in_reg[8'h20 + c] !== ref_val[c] || shadow[c] !== ref_val[c]) begin
      failures++;
      $display("%s: ch %0d dac %h shadow %h exp %h", what, c, dac.in_reg[8'h20 + c], shadow[c], ref_val[c]);
      break;
    end
  endtask

  int order_err = 0, last_a = -1;
  always @(posedge cs_n) begin
    #1;  // after the DAC model has taken the frame
    if (dac.last_addr <= last_a) order_err++;
    last_a = dac.last_addr;
  end

  initial begin
    for (int c = 0; c < N; c++) ref_val[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      wr($urandom_range(0, N - 1), 16'($urandom));
      settle_and_check("single");
    end
    for (int i = 0; i < 60; i++) wr($urandom_range(0, N - 1), 16'($urandom));  // burst
    settle_and_check("burst");
    // rewrite a channel while its frame is on the wire
    wr(5, 16'h1111);
    wait (!cs_n);
    wr(5, 16'h2222);
    settle_and_check("rewrite");
    // refresh: every channel once, ascending
    begin
      int f0;
      for (int c = 0; c < N; c++) dac.in_reg[8'h20 + c] = 16'hDEAD;
      f0 = dac.frames;
      last_a = -1; order_err = 0;
      @(negedge clk); refresh = 1; @(negedge clk); refresh = 0;
      settle_and_check("refresh");
      checks++;
      if (dac.frames - f0 != N || order_err != 0) begin
        failures++; $display("refresh: %0d frames, %0d out of order", dac.frames - f0, order_err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
