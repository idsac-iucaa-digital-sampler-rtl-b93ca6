// tb_dcds: checks the digital CDS arithmetic and pixel closing.
//
// Pixels are built from random reference and signal groups of 1..6 samples
// (plus an empty reference group, a negative difference and a 16-sample
// signal group that overflows MAX_SAMP = 15), separated by untagged samples
// or, sometimes, closed directly by the next pixel's first reference sample.
// The expected pixel floor(mean ref) - floor(mean sig), clamped at 0, is
// computed here; it must appear exactly 23 clocks (SW+3 edges of the
// bit-serial divider, SW = 20) after the closing sample. Samples come at the
// ADC rate of one per 16 clocks; a last directed case closes two pixels four
// clocks apart, which loses the first and flags the second with ovf.
module tb_dcds;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [15:0] s_data, pix_data;
  logic [1:0]  s_tag;
  logic        s_valid = 0, pix_valid, ovf;
  int checks = 0, failures = 0;

  dcds #(.ADC_BITS(16), .MAX_SAMP(15)) dut (.*);

  typedef struct { int v; bit o; } exp_t;
  exp_t q [$];
  localparam int LAT = 23;
  int cyc = 0, last_close = 0;
  bit seen_sig = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (s_valid && s_tag == 2'b10) seen_sig <= 1'b1;
    else if (s_valid && seen_sig) begin last_close <= cyc; seen_sig <= 1'b0; end
  end

  always @(posedge clk) if (pix_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected pixel"); end
    else begin
      e = q.pop_front();
      if (pix_data != 16'(e.v) || ovf != e.o || cyc != last_close + LAT) begin
        failures++;
        $display("pixel: got %0d ovf %0d at %0d, exp %0d ovf %0d, closed at %0d",
                 pix_data, ovf, cyc, e.v, e.o, last_close);
      end
    end
  end

  task automatic smp(input logic [15:0] d, input logic [1:0] t);
    int gap;
    gap = fast ? 0 : 15;                            // one ADC word per 16 clocks
    @(negedge clk);
    s_data = d; s_tag = t; s_valid = 1'b1;
    @(negedge clk);
    s_valid = 1'b0;
    repeat (gap) @(negedge clk);
  endtask

  bit fast = 0;

  // A reference sample that closed the previous pixel (-1: none).
  int carry = -1;

  task automatic pixel(input int nr, input int ns, input int base_r, input int base_s,
                       input bit close_with_ref);
    longint sr = 0, ss = 0; int d, kr = 0, ks = 0; bit o = 0; exp_t e;
    if (carry >= 0) begin sr = carry; kr = 1; carry = -1; end
    for (int i = 0; i < nr; i++) begin
      d = base_r + $urandom_range(0, 200);
      if (kr < 15) begin sr += d; kr++; end else o = 1;
      smp(16'(d), 2'b01);
    end
    repeat ($urandom_range(0, 2)) smp(16'($urandom), 2'b00);
    for (int i = 0; i < ns; i++) begin
      d = base_s + $urandom_range(0, 200);
      if (ks < 15) begin ss += d; ks++; end else o = 1;
      smp(16'(d), 2'b10);
    end
    e.v = int'((kr != 0 ? sr / kr : 0) - (ks != 0 ? ss / ks : 0));
    if (e.v < 0) e.v = 0;
    e.o = o;
    q.push_back(e);
    if (close_with_ref) begin
      carry = 30000 + $urandom_range(0, 1000);
      smp(16'(carry), 2'b01);
    end else begin
      smp(16'($urandom), 2'b00);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int p = 0; p < 200; p++)
      pixel($urandom_range(1, 6), $urandom_range(1, 6), 30000 + $urandom_range(0, 20000),
            $urandom_range(0, 30000), $urandom_range(0, 3) == 0);
    pixel(3, 3, 100, 40000, 1'b0);   // negative: clamp to 0
    pixel(0, 3, 0, 500, 1'b0);       // empty reference group
    pixel(4, 16, 60000, 1000, 1'b0); // overflow of the signal group
    pixel(2, 2, 50000, 10000, 1'b0);
    repeat (30) @(posedge clk);
    // overrun: the second close comes while the first pixel is being divided
    fast = 1;
    smp(16'd40000, 2'b01); smp(16'd1000, 2'b10); smp(16'd0, 2'b00);
    smp(16'd2000, 2'b10); smp(16'd0, 2'b00);
    fast = 0;
    begin exp_t e; e.v = 0; e.o = 1; q.push_back(e); end
    repeat (30) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d pixels missing", q.size()); end
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
