// tb_cmd_decoder: checks command parsing and the register map.
//
// Commands are sent as word pairs with random gaps. The test writes random
// values to every waveform entry, parallel state, geometry register and
// parallel level code and compares the decoder's outputs with them; checks
// that static DAC writes come out as one-clock write strobes with the right
// channel; that start, abort and refresh give one-clock pulses; and that an
// unknown opcode or unmapped address raises cmd_err and changes nothing.
module tb_cmd_decoder;
  import idsac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [15:0] rx_data;
  logic        rx_valid = 0, rx_ready;
  logic        wf_wr_en;
  logic [3:0]  wf_wr_addr;
  wf_entry_t   wf_wr_data;
  geom_t       geom;
  pstate_t     pstates [8];
  logic [9:0][2:0][15:0] pcodes;
  logic        stat_wr_en;
  logic [5:0]  stat_wr_ch;
  logic [15:0] stat_wr_code;
  logic        start, abort, refresh, cmd_err;
  int checks = 0, failures = 0;

  cmd_decoder #(.N_WF(16), .N_PSTATES(8), .N_PAR(10), .N_STATIC(39)) dut (.*);

  // table writes seen on the write port
  wf_entry_t tbl [16];
  int n_start = 0, n_abort = 0, n_refresh = 0, n_err = 0, n_stat = 0;
  logic [15:0] stat_seen [39];
  always @(posedge clk) if (rst_n) begin
    if (wf_wr_en) tbl[wf_wr_addr] <= wf_wr_data;
    if (start) n_start++;
    if (abort) n_abort++;
    if (refresh) n_refresh++;
    if (cmd_err) n_err++;
    if (stat_wr_en) begin n_stat++; stat_seen[stat_wr_ch] <= stat_wr_code; end
  end

  task automatic word(input logic [15:0] w);
    @(negedge clk);
    rx_data = w; rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  task automatic cmd(input logic [3:0] op, input logic [11:0] a, input logic [15:0] d);
    word({op, a});
    word(d);
  endtask

  initial begin
    wf_entry_t   e_wf [16];
    pstate_t     e_ps [8];
    logic [15:0] e_pc [10][3];
    logic [15:0] e_st [39];
    logic [15:0] g [8];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      e_wf[i] = '{dur: 16'($urandom), bits: 16'($urandom)};
      cmd(OP_WRITE, 12'(2 * i), e_wf[i].dur);
      cmd(OP_WRITE, 12'(2 * i + 1), e_wf[i].bits);
    end
    for (int j = 0; j < 8; j++) begin
      e_ps[j] = '{levels: 20'($urandom), dwell: 16'($urandom)};
      cmd(OP_WRITE, 12'h040 + 12'(4 * j), e_ps[j].levels[7:0]);
      cmd(OP_WRITE, 12'h041 + 12'(4 * j), {12'h0, 4'(e_ps[j].levels[9:8])});
      cmd(OP_WRITE, 12'h042 + 12'(4 * j), e_ps[j].dwell);
    end
    for (int k = 0; k < 8; k++) begin g[k] = 16'($urandom); cmd(OP_WRITE, 12'h070 + 12'(k), g[k]); end
    for (int c = 0; c < 10; c++) for (int l = 0; l < 3; l++) begin
      e_pc[c][l] = 16'($urandom);
      cmd(OP_WRITE, 12'h080 + 12'(4 * c + l), e_pc[c][l]);
    end
    for (int s = 0; s < 39; s++) begin e_st[s] = 16'($urandom); cmd(OP_WRITE, 12'h100 + 12'(s), e_st[s]); end
    cmd(OP_START, 0, 0); cmd(OP_ABORT, 0, 0); cmd(OP_REFRESH, 0, 0); cmd(OP_START, 0, 0);
    cmd(4'h9, 0, 0);                 // unknown opcode
    cmd(OP_WRITE, 12'h200, 16'h5555); // unmapped address
    cmd(OP_WRITE, 12'h083, 16'h5555); // hole in the level-code map
    repeat (3) @(negedge clk);

    for (int i = 0; i < 16; i++) begin
      checks++;
      if (tbl[i] !== e_wf[i]) begin failures++; $display("wf %0d: %h exp %h", i, tbl[i], e_wf[i]); end
    end
    for (int j = 0; j < 8; j++) begin
      checks++;
      if (pstates[j] !== e_ps[j]) begin failures++; $display("pstate %0d: %h exp %h", j, pstates[j], e_ps[j]); end
    end
    checks++;
    if (geom !== {g[0], g[1], g[2], g[3], g[4], g[5][3:0], g[6][4:0], g[7]}) begin
      failures++; $display("geom %h", geom);
    end
    for (int c = 0; c < 10; c++) for (int l = 0; l < 3; l++) begin
      checks++;
      if (pcodes[c][l] !== e_pc[c][l]) begin failures++; $display("pcode %0d/%0d", c, l); end
    end
    for (int s = 0; s < 39; s++) begin
      checks++;
      if (stat_seen[s] !== e_st[s]) begin failures++; $display("static %0d", s); end
    end
    checks++;
    if (n_stat != 39 || n_start != 2 || n_abort != 1 || n_refresh != 1 || n_err != 3) begin
      failures++;
      $display("counts: stat %0d start %0d abort %0d refresh %0d err %0d", n_stat, n_start, n_abort, n_refresh, n_err);
    end
    checks++;
    if (!rx_ready) failures++;
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
