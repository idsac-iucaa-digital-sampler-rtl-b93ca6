// parallel_clock_ctrl: tri-level parallel (image-area and transfer-gate) clocks.
//
// The parallel clocks are slow, so instead of switching each between two DACs
// with an analog switch (as the serial clocks are), the controller gives each
// parallel clock a single DAC channel and changes the clock state by writing a
// new DAC value. The DAC holds new values in its input registers until its
// LDAC strobe, which moves all of them to the outputs at once, so all clocks
// change together. A third level between low and high comes for free, which
// allows slow tri-level clocking.
//
// This block takes a requested state: a level (low, mid, high; idsac_pkg
// par_level_e, code 3 is read as high) for each of the N_PAR clocks. For each
// clock whose level differs from the one last loaded it sends one SPI frame
// {ADDR_BASE+i, code of that level} through spi_dac_master, and then pulls
// `ldac_n` low for LDAC_W clocks. The first request after reset writes every
// channel. `done` pulses in the clock in which `ldac_n` returns high and
// `cur_levels` takes the new state; `req_ready` is high
// while idle. The level codes per clock and level come from the host registers.
//
// The preload-then-LDAC scheme follows the controller's description; the
// skipping of unchanged channels, the addresses and LDAC width are this
// design's choices.
module parallel_clock_ctrl
  import idsac_pkg::*;
#(
  parameter int unsigned N_PAR     = 10,
  parameter int unsigned CLK_DIV   = 4,
  parameter int unsigned LDAC_W    = 4,
  parameter logic [7:0]  ADDR_BASE = 8'h00
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_PAR-1:0][2:0][15:0]   codes,     // [clock][level] DAC code
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic [N_PAR-1:0][1:0]         req_levels,
  output logic                          done,
  output logic [N_PAR-1:0][1:0]         cur_levels, // state now on the DAC outputs
  // DAC pins
  output logic                          sclk,
  output logic                          mosi,
  output logic                          cs_n,
  output logic                          ldac_n
);
  localparam int unsigned IW = $clog2(N_PAR + 1);

  typedef enum logic [2:0] {P_IDLE, P_SCAN, P_SEND, P_WAIT, P_LDAC} pstate_e;
  pstate_e                   st;
  logic [N_PAR-1:0][1:0]     tgt;
  logic                      loaded;     // DAC outputs known since reset
  logic [IW-1:0]             ch;
  logic [$clog2(LDAC_W+1)-1:0] lcnt;

  logic       spi_valid, spi_ready, spi_done;
  dac_word_t  spi_word;

  function automatic logic [1:0] lvl_idx(logic [1:0] l);
    return (l == 2'd3) ? 2'd2 : l;
  endfunction

  assign req_ready = (st == P_IDLE);
  assign spi_valid = (st == P_SEND);
  assign spi_word  = '{addr: ADDR_BASE + 8'(ch),
                       code: codes[ch[$clog2(N_PAR)-1:0]][lvl_idx(tgt[ch[$clog2(N_PAR)-1:0]])]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= P_IDLE;
      tgt        <= '0;
      cur_levels <= '0;
      loaded     <= 1'b0;
      ch         <= '0;
      lcnt       <= '0;
      ldac_n     <= 1'b1;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        P_IDLE: if (req_valid) begin
          tgt <= req_levels;
          ch  <= '0;
          st  <= P_SCAN;
        end
        P_SCAN: begin
          if (ch == IW'(N_PAR)) begin
            ldac_n <= 1'b0;
            lcnt   <= $bits(lcnt)'(LDAC_W - 1);
            st     <= P_LDAC;
          end else if (!loaded ||
                       tgt[ch[$clog2(N_PAR)-1:0]] != cur_levels[ch[$clog2(N_PAR)-1:0]]) begin
            st <= P_SEND;
          end else begin
            ch <= ch + 1'b1;
          end
        end
        P_SEND: if (spi_ready) st <= P_WAIT;
        P_WAIT: if (spi_done) begin
          ch <= ch + 1'b1;
          st <= P_SCAN;
        end
        P_LDAC: begin
          if (lcnt != '0) lcnt <= lcnt - 1'b1;
          else begin
            ldac_n     <= 1'b1;
            cur_levels <= tgt;
            loaded     <= 1'b1;
            done       <= 1'b1;
            st         <= P_IDLE;
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  spi_dac_master #(.CLK_DIV(CLK_DIV)) u_spi (
    .clk, .rst_n,
    .req_valid (spi_valid),
    .req_ready (spi_ready),
    .req       (spi_word),
    .done      (spi_done),
    .sclk, .mosi, .cs_n
  );

  // LDAC must not fall while a DAC frame is on the wire.
  a_ldac_outside_frame: assert property (@(posedge clk) disable iff (!rst_n) !ldac_n |-> cs_n);

endmodule
