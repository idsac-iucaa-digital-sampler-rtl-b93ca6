// cmd_decoder: host command parser and configuration registers.
//
// The host software turns the detector's parameter files into low-level
// commands and sends them to the FPGA over the USB link. This block receives
// those commands as a stream of 16-bit words and keeps the configuration the
// rest of the firmware runs from. Every command is two words:
//
//   word 0: {opcode[3:0], address[11:0]}     word 1: data[15:0]
//
//   OP_WRITE   (1)  write `data` to register `address`
//   OP_START   (2)  start a frame readout
//   OP_ABORT   (3)  stop the readout at once
//   OP_REFRESH (4)  resend every static DAC channel
//
// Register map (see idsac_pkg), addresses in hex:
//   000 + 2i    waveform entry i duration; 001 + 2i  its 16 output bits.
//               An entry is written to the waveform table when its bits
//               word arrives, with the duration last written to 000 + 2i.
//   040 + 4j    parallel state j levels, clocks 7..0 (2 bits each)
//   041 + 4j    parallel state j levels, clocks 9..8
//   042 + 4j    parallel state j dwell after LDAC, in clocks
//   070..077    rows_skip, rows_read, cols_skip, cols_read, cols_over,
//               n_pstates, n_wf, idle_bits
//   080 + 4c+l  DAC code of parallel clock c at level l (0 low, 1 mid, 2 high)
//   100 + k     static DAC channel k (biases 0..16, serial rails 17..36,
//               HV clock rails 37..38), passed on to bias_ctrl
//
// An unknown opcode or an address outside the map raises `cmd_err` for one
// clock and is otherwise ignored. The receive side is always ready. Register
// writes take effect in the clock after word 1. The command format and map
// are this design's own; the controller's description gives neither.
module cmd_decoder
  import idsac_pkg::*;
#(
  parameter int unsigned N_WF      = 16,
  parameter int unsigned N_PSTATES = 8,
  parameter int unsigned N_PAR     = 10,
  parameter int unsigned N_STATIC  = 39
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host word stream
  input  logic [15:0]                   rx_data,
  input  logic                          rx_valid,
  output logic                          rx_ready,
  // waveform table write port
  output logic                          wf_wr_en,
  output logic [$clog2(N_WF)-1:0]       wf_wr_addr,
  output wf_entry_t                     wf_wr_data,
  // configuration
  output geom_t                         geom,
  output pstate_t                       pstates [N_PSTATES],
  output logic [N_PAR-1:0][2:0][15:0]   pcodes,
  // static DAC writes
  output logic                          stat_wr_en,
  output logic [$clog2(N_STATIC)-1:0]   stat_wr_ch,
  output logic [15:0]                   stat_wr_code,
  // commands
  output logic                          start,
  output logic                          abort,
  output logic                          refresh,
  output logic                          cmd_err
);
  logic        have_hdr;
  logic [3:0]  op;
  logic [11:0] addr;
  logic [15:0] dur_stage [N_WF];

  assign rx_ready = 1'b1;

  wire        cmd_go = rx_valid && have_hdr;
  wire [15:0] d      = rx_data;

  // table indices of the current address
  wire [11:0] ps_off = addr - RA_PS_BASE;
  wire [11:0] pc_off = addr - RA_PCODE_BASE;
  wire [$clog2(N_PSTATES)-1:0] ps_i = ps_off[$clog2(N_PSTATES)+1:2];
  wire [$clog2(N_PAR)-1:0]     pc_i = pc_off[$clog2(N_PAR)+1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_hdr     <= 1'b0;
      op           <= '0;
      addr         <= '0;
      wf_wr_en     <= 1'b0;
      wf_wr_addr   <= '0;
      wf_wr_data   <= '0;
      geom         <= '0;
      pcodes       <= '0;
      stat_wr_en   <= 1'b0;
      stat_wr_ch   <= '0;
      stat_wr_code <= '0;
      start        <= 1'b0;
      abort        <= 1'b0;
      refresh      <= 1'b0;
      cmd_err      <= 1'b0;
      for (int i = 0; i < N_WF; i++)      dur_stage[i] <= '0;
      for (int j = 0; j < N_PSTATES; j++) pstates[j]   <= '0;
    end else begin
      wf_wr_en   <= 1'b0;
      stat_wr_en <= 1'b0;
      start      <= 1'b0;
      abort      <= 1'b0;
      refresh    <= 1'b0;
      cmd_err    <= 1'b0;
      if (rx_valid && !have_hdr) begin
        op       <= rx_data[15:12];
        addr     <= rx_data[11:0];
        have_hdr <= 1'b1;
      end
      if (cmd_go) begin
        have_hdr <= 1'b0;
        case (op)
          OP_WRITE: begin
            if (addr < 12'(RA_WF_BASE + 2 * N_WF)) begin
              if (!addr[0]) dur_stage[addr[$clog2(N_WF):1]] <= d;
              else begin
                wf_wr_en   <= 1'b1;
                wf_wr_addr <= addr[$clog2(N_WF):1];
                wf_wr_data <= '{dur: dur_stage[addr[$clog2(N_WF):1]], bits: d};
              end
            end else if (addr >= RA_PS_BASE && addr < 12'(RA_PS_BASE + 4 * N_PSTATES)) begin
              case (addr[1:0])
                2'd0: pstates[ps_i].levels[7:0] <= d;
                2'd1: pstates[ps_i].levels[N_PAR-1:8] <= d[2*N_PAR-17:0];
                2'd2: pstates[ps_i].dwell <= d;
                default: cmd_err <= 1'b1;
              endcase
            end else if (addr >= RA_GEOM_BASE && addr < RA_GEOM_BASE + 12'd8) begin
              case (addr[2:0])
                3'd0: geom.rows_skip <= d;
                3'd1: geom.rows_read <= d;
                3'd2: geom.cols_skip <= d;
                3'd3: geom.cols_read <= d;
                3'd4: geom.cols_over <= d;
                3'd5: geom.n_pstates <= d[3:0];
                3'd6: geom.n_wf      <= d[4:0];
                default: geom.idle_bits <= d;
              endcase
            end else if (addr >= RA_PCODE_BASE && addr < 12'(RA_PCODE_BASE + 4 * N_PAR)) begin
              if (addr[1:0] == 2'd3) cmd_err <= 1'b1;
              else pcodes[pc_i][addr[1:0]] <= d;
            end else if (addr >= RA_STAT_BASE && addr < 12'(RA_STAT_BASE + N_STATIC)) begin
              stat_wr_en   <= 1'b1;
              stat_wr_ch   <= $bits(stat_wr_ch)'(addr - RA_STAT_BASE);
              stat_wr_code <= d;
            end else begin
              cmd_err <= 1'b1;
            end
          end
          OP_START:   start   <= 1'b1;
          OP_ABORT:   abort   <= 1'b1;
          OP_REFRESH: refresh <= 1'b1;
          default:    cmd_err <= 1'b1;
        endcase
      end
    end
  end

endmodule
