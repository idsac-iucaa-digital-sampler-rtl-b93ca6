// waveform_gen: pixel timing generator.
//
// One pixel period of a CCD readout is a fixed pattern of clock edges: the
// serial register clocks move the charge, the reset gate is pulsed, the
// summing well dumps the charge onto the output node, and the video chain
// samples the reset and the signal levels. The controller drives the analog
// switch of each bi-level serial clock driver from the FPGA, so the pattern is
// a set of logic levels in time. This block plays it from a small table that
// the host loads: entry i holds 16 output bits and a duration, and lasts
// dur+1 system clocks. Bits 9..0 drive the 10 serial-clock switches, bit 10
// the high-voltage clock, bit 11 the anti-aliasing filter reset switch, bit 12
// the DCDS reference window and bit 13 the signal window (see idsac_pkg).
//
// A one-clock `start` plays entries 0 .. n_entries-1 once; `busy` is high
// while it plays and `done` pulses in the clock after the last entry ends.
// A start during play is ignored. With `sample_en` low the two window bits
// are forced low, so the pixel is clocked but not digitised (skipped pixels).
// Between pixels the outputs hold `idle_bits`. Outputs are registered: entry
// 0 appears one clock after `start`. The table is written through a simple
// write port (`wr_en`, `wr_addr`, `wr_data`).
//
// The table form, its size and the bit assignment are this design's choices.
module waveform_gen
  import idsac_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // table write port
  input  logic                          wr_en,
  input  logic [$clog2(N_ENTRIES)-1:0]  wr_addr,
  input  wf_entry_t                     wr_data,
  // control
  input  logic [$clog2(N_ENTRIES):0]    n_entries,   // 1..N_ENTRIES
  input  wf_bits_t                      idle_bits,
  input  logic                          start,
  input  logic                          sample_en,
  output logic                          busy,
  output logic                          done,
  // timing outputs
  output wf_bits_t                      wf_out
);
  localparam int unsigned AW = $clog2(N_ENTRIES);

  wf_entry_t      table_q [N_ENTRIES];
  logic [AW:0]    idx;
  logic [15:0]    cnt;
  logic           smp;

  always_ff @(posedge clk) begin
    if (wr_en) table_q[wr_addr] <= wr_data;
  end

  function automatic wf_bits_t gate(wf_bits_t b, logic en);
    wf_bits_t r = b;
    if (!en) begin
      r[WB_REF] = 1'b0;
      r[WB_SIG] = 1'b0;
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      idx    <= '0;
      cnt    <= '0;
      smp    <= 1'b0;
      wf_out <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        wf_out <= idle_bits;
        if (start && n_entries != '0) begin
          busy   <= 1'b1;
          idx    <= '0;
          cnt    <= table_q[0].dur;
          smp    <= sample_en;
          wf_out <= gate(table_q[0].bits, sample_en);
        end
      end else if (cnt != '0) begin
        cnt <= cnt - 1'b1;
      end else if (idx + 1'b1 < n_entries) begin
        idx    <= idx + 1'b1;
        cnt    <= table_q[AW'(idx + 1'b1)].dur;
        wf_out <= gate(table_q[AW'(idx + 1'b1)].bits, smp);
      end else begin
        busy   <= 1'b0;
        done   <= 1'b1;
        wf_out <= idle_bits;
      end
    end
  end

  // The entry count must lie inside the table.
  a_n_entries: assert property (@(posedge clk) disable iff (!rst_n)
                                start |-> (n_entries <= ($clog2(N_ENTRIES)+1)'(N_ENTRIES)));

endmodule
