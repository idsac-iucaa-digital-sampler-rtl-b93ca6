// tb_adc_serial_rx: checks the serial ADC receiver against adc_model.
//
// A random level is presented to the ADC model and a random tag to the
// receiver at every conversion. Each received word must equal the level of
// its conversion, carry that conversion's tag, and arrive once per
// CLK_PER_SAMPLE clocks (10 MSPS at 160 MHz). The strobe period is checked.
module tb_adc_serial_rx;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        cnv, sdata, sframe, word_valid;
  logic [15:0] level, word;
  logic [1:0]  tag, word_tag;
  int checks = 0, failures = 0;

  adc_serial_rx #(.ADC_BITS(16), .CLK_PER_SAMPLE(16), .LATENCY(1), .TAG_BITS(2)) dut (
    .clk, .rst_n, .cnv, .sdata, .sframe, .tag_in (tag),
    .word, .word_tag, .word_valid);
  adc_model adc (.clk, .cnv, .level, .sdata, .sframe);

  // conversions in flight, in order
  logic [17:0] q [$];
  int cyc = 0, last_cnv = -1, last_word = -1, words = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && cnv) begin
      q.push_back({tag, level});
      if (last_cnv >= 0) begin
        checks++;
        if (cyc - last_cnv != 16) begin failures++; $display("cnv period %0d", cyc - last_cnv); end
      end
      last_cnv = cyc;
    end
    if (rst_n && word_valid) begin
      logic [17:0] e;
      // the first word out carries the ADC's content from before reset, not
      // a conversion of this test: only its timing is used
      e = (words == 0) ? {word_tag, word} : q.pop_front();
      checks++;
      if ({word_tag, word} !== e) begin
        failures++;
        $display("word %0d: got %h/%0d exp %h/%0d", words, word, word_tag, e[15:0], e[17:16]);
      end
      if (last_word >= 0) begin
        checks++;
        if (cyc - last_word != 16) failures++;
      end
      last_word = cyc;
      words++;
    end
  end

  // new stimulus right after each strobe
  always @(negedge clk) if (cnv) begin
    level <= 16'($urandom);
    tag   <= 2'($urandom);
  end

  initial begin
    level = 16'h1234; tag = 2'b01;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (words == 300);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
