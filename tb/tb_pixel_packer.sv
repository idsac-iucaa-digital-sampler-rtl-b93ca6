// tb_pixel_packer: checks channel merging, FIFO order and overflow.
//
// Four channels deliver pixels together every 20 clocks while the reader
// takes words with random stalls. The output must be every pixel in order,
// channel 0 to 3 within a pixel period. Then the reader stops long enough
// for a small FIFO to fill and a channel to be overwritten: `ovf` must rise,
// and `clr` must clear it.
module tb_pixel_packer;
  localparam int NC = 4, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic                     clr = 0, out_valid, out_ready = 0, ovf;
  logic [NC-1:0][15:0]      pix_data;
  logic [NC-1:0]            pix_valid = '0;
  logic [15:0]              out_data;
  logic [$clog2(DEPTH):0]   level;
  int checks = 0, failures = 0;

  pixel_packer #(.N_CH(NC), .WIDTH(16), .FIFO_DEPTH(DEPTH)) dut (.*);

  logic [15:0] q [$];
  bit check_order = 1;
  always @(posedge clk) if (out_valid && out_ready && check_order) begin
    logic [15:0] e;
    checks++;
    e = q.pop_front();
    if (out_data !== e) begin failures++; $display("word %h exp %h", out_data, e); end
  end

  task automatic pixels(input int n);
    for (int p = 0; p < n; p++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        pix_data[c] = 16'($urandom);
        q.push_back(pix_data[c]);
      end
      pix_valid = '1;
      @(negedge clk);
      pix_valid = '0;
      repeat (18) begin
        out_ready = ($urandom_range(0, 3) != 0);
        @(negedge clk);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    pixels(200);
    out_ready = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (q.size() != 0 || ovf) begin failures++; $display("%0d words left, ovf %0d", q.size(), ovf); end
    // overflow: reader stopped
    check_order = 0;
    out_ready = 0;
    repeat (8) begin
      @(negedge clk); pix_data = '1; pix_valid = '1;
      @(negedge clk); pix_valid = '0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (!ovf || level != DEPTH) begin failures++; $display("no overflow: ovf %0d level %0d", ovf, level); end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (ovf) begin failures++; $display("ovf not cleared"); end
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
