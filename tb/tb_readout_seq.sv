// tb_readout_seq: checks the frame / region-of-interest sequencing.
//
// The parallel clock controller and the waveform generator are replaced by
// simple responders with random delays. For several random geometries the
// test checks the order of operations: every row starts with the n_pstates
// parallel states in table order, each followed by at least `dwell` idle
// clocks; then exactly cols_skip+cols_read+cols_over pixels, each started in
// the clock its predecessor finished; sample_en high exactly for rows >=
// rows_skip and columns >= cols_skip; one frame_done at the end. An abort in
// mid-frame must return the sequencer to idle in the next clock.
module tb_readout_seq;
  import idsac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic       start = 0, abort = 0;
  geom_t      geom;
  pstate_t    pstates [8];
  logic       par_req_valid, par_req_ready, par_done = 0;
  par_state_t par_req_levels;
  logic       wf_start, wf_sample_en, wf_done = 0;
  logic       busy, frame_done;
  logic [16:0] row, col;
  int checks = 0, failures = 0;

  readout_seq #(.N_PSTATES(8)) dut (.*);

  // parallel clock responder
  logic par_busy = 0;
  assign par_req_ready = !par_busy;
  int   par_log_idx = 0, par_done_cyc = 0, cyc = 0;
  par_state_t par_log [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial forever begin
    @(posedge clk);
    if (par_req_valid && par_req_ready) begin
      par_log.push_back(par_req_levels);
      par_busy <= 1;
      repeat ($urandom_range(1, 6)) @(posedge clk);
      par_done <= 1;
      @(posedge clk);
      par_done <= 0;
      par_busy <= 0;
      par_done_cyc = cyc;
    end
  end

  // waveform responder: a pixel lasts PIX clocks, done in the clock after
  localparam int PIX = 5;
  int wf_cnt = 0;
  bit wf_run = 0;
  typedef struct { bit en; int r; int c; int npar; } pix_t;
  pix_t pix_log [$];
  int dwell_err = 0, b2b_err = 0, last_done = -10;
  bit log_next = 0, en_next;
  always @(posedge clk) begin
    wf_done <= 0;
    // row/col name the pixel being played: read them in its first clock
    if (log_next) pix_log.push_back('{en_next, int'(row), int'(col), par_log.size()});
    log_next <= wf_start;
    en_next  <= wf_sample_en;
    if (wf_start) begin
      if (wf_run && !wf_done) b2b_err++;
      wf_run <= 1; wf_cnt <= PIX;
    end else if (wf_run) begin
      if (wf_cnt == 1) begin wf_run <= 0; wf_done <= 1; end
      wf_cnt <= wf_cnt - 1;
    end
  end

  // dwell: next parallel request (or first pixel) not before dwell clocks
  int need_dwell = 0;

  task automatic frame(input int rs, input int rr, input int cs, input int cr, input int co,
                       input int np);
    int nrows, ncols, k;
    geom.rows_skip = 16'(rs); geom.rows_read = 16'(rr);
    geom.cols_skip = 16'(cs); geom.cols_read = 16'(cr); geom.cols_over = 16'(co);
    geom.n_pstates = 4'(np);
    for (int j = 0; j < 8; j++) pstates[j] = '{levels: 20'($urandom), dwell: 16'($urandom_range(0, 9))};
    par_log.delete(); pix_log.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (frame_done);
    @(negedge clk);
    nrows = rs + rr; ncols = cs + cr + co;
    checks++;
    if (par_log.size() != nrows * np || pix_log.size() != nrows * ncols) begin
      failures++;
      $display("frame: %0d par states, %0d pixels; exp %0d, %0d", par_log.size(), pix_log.size(), nrows * np, nrows * ncols);
      return;
    end
    foreach (par_log[i]) begin
      checks++;
      if (par_log[i] != pstates[i % np].levels) begin failures++; $display("par state %0d", i); end
    end
    k = 0;
    for (int r = 0; r < nrows; r++) for (int c = 0; c < ncols; c++) begin
      bit en = (r >= rs) && (c >= cs);
      checks++;
      if (pix_log[k].en != en || pix_log[k].r != r || pix_log[k].c != c || pix_log[k].npar != (r + 1) * np) begin
        failures++;
        $display("pixel %0d: en %0d r %0d c %0d npar %0d", k, pix_log[k].en, pix_log[k].r, pix_log[k].c, pix_log[k].npar);
      end
      k++;
    end
    checks++;
    if (b2b_err != 0) begin failures++; $display("pixel start while busy"); end
  endtask

  // dwell check: clocks between a par_done and the following request / pixel
  int since_done = 1000;
  logic [15:0] cur_dwell;
  int pidx_mon = 0;
  always @(posedge clk) begin
    if (par_done) begin
      since_done = 0;
      cur_dwell = pstates[pidx_mon % int'(geom.n_pstates)].dwell;
      pidx_mon++;
    end else since_done++;
    if ((par_req_valid && par_req_ready && since_done < 1000 && since_done <= int'(cur_dwell)) ||
        (wf_start && since_done <= int'(cur_dwell))) begin
      dwell_err++;
    end
    if (start) pidx_mon = 0;
  end

  initial begin
    geom = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(0, 2, 0, 3, 0, 1);
    frame(2, 3, 2, 4, 2, 3);
    frame(1, 2, 0, 1, 3, 8);
    frame($urandom_range(0, 3), $urandom_range(1, 4), $urandom_range(0, 4), $urandom_range(1, 5),
          $urandom_range(0, 3), $urandom_range(1, 8));
    checks++;
    if (dwell_err != 0) begin failures++; $display("%0d dwell violations", dwell_err); end
    // abort in the middle of a frame
    geom.rows_read = 16'd50;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (!busy) failures++;
    abort = 1; @(negedge clk); abort = 0;
    checks++;
    if (busy) begin failures++; $display("busy after abort"); end
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
