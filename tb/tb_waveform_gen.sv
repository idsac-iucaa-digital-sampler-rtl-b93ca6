// tb_waveform_gen: checks the pixel timing generator cycle by cycle.
//
// A random table is loaded and played with random entry counts, with and
// without sample_en. The expected output of every clock is built here from
// the table: idle bits, then entry i for dur_i+1 clocks starting one clock
// after `start`, with the two DCDS window bits cleared when sample_en is low.
// `done` must pulse exactly sum(dur_i+1)+1 clocks after `start`, and a start
// while playing must be ignored. The 320-clock pixel of the default table
// (0.5 Mpixel/s at 160 MHz) is played once and its period checked.
module tb_waveform_gen;
  import idsac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        wr_en = 0, start = 0, sample_en = 0, busy, done;
  logic [3:0]  wr_addr;
  wf_entry_t   wr_data;
  logic [4:0]  n_entries;
  wf_bits_t    idle_bits, wf_out;
  int checks = 0, failures = 0;

  waveform_gen #(.N_ENTRIES(16)) dut (.*);

  wf_entry_t tbl [16];

  task automatic load(input int i, input wf_entry_t e);
    @(negedge clk);
    wr_en = 1; wr_addr = 4'(i); wr_data = e;
    @(negedge clk);
    wr_en = 0;
    tbl[i] = e;
  endtask

  task automatic play(input int n, input bit en, input bit poke);
    wf_bits_t exp_b;
    int total = 0;
    n_entries = 5'(n);
    @(negedge clk);
    start = 1; sample_en = en;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < n; i++) begin
      exp_b = tbl[i].bits;
      if (!en) begin exp_b[WB_REF] = 0; exp_b[WB_SIG] = 0; end
      for (int k = 0; k <= int'(tbl[i].dur); k++) begin
        checks++;
        if (wf_out !== exp_b || !busy || done) begin
          failures++;
          $display("entry %0d clk %0d: got %h exp %h", i, k, wf_out, exp_b);
        end
        if (poke && i == 0 && k == 0) start = 1;     // must be ignored
        else start = 0;
        total++;
        @(negedge clk);
      end
    end
    checks++;
    if (!done || wf_out !== idle_bits || busy) begin
      failures++;
      $display("end: done %0d busy %0d out %h after %0d clocks", done, busy, wf_out, total);
    end
    @(negedge clk);
    checks++;
    if (done || wf_out !== idle_bits) begin failures++; $display("after end"); end
  endtask

  initial begin
    idle_bits = 16'h0201;
    n_entries = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) load(i, '{dur: 16'($urandom_range(0, 12)), bits: 16'($urandom)});
    for (int r = 0; r < 40; r++) play($urandom_range(1, 16), $urandom_range(0, 1), r % 5 == 0);
    // default pixel table: 7 entries, 319 clocks
    begin
      int durs [7] = '{31, 31, 47, 47, 31, 47, 78};
      int t0, t1;
      for (int i = 0; i < 7; i++) load(i, '{dur: 16'(durs[i]), bits: 16'(1 << i)});
      n_entries = 7;
      @(negedge clk); start = 1; sample_en = 1;
      @(negedge clk); start = 0;
      t0 = $time;
      wait (done);
      @(negedge clk); start = 1;      // back to back, as the sequencer does
      @(negedge clk); start = 0;
      t1 = $time;
      checks++;
      if ((t1 - t0) / 2 != 320) begin failures++; $display("pixel period %0d", (t1 - t0) / 2); end
      wait (done);
    end
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
