// spi_dac_master: serial write port to the clock and bias DACs.
//
// The controller sets its bias voltages, its serial-clock rails and its
// parallel-clock levels by programming DACs from the FPGA. The DAC part is not
// specified, so this port assumes a common SPI-style write: chip select low,
// 24 bits MSB first, {channel address[7:0], code[15:0]}, data changing while
// SCLK is low and taken by the DAC on the SCLK rising edge (mode 0).
//
// A request is taken when `req_valid` and `req_ready` are both high. SCLK is
// clk / (2*CLK_DIV). CS_N falls CLK_DIV clocks before the first rising SCLK
// edge, rises CLK_DIV clocks after the last falling edge and then stays high
// CLK_DIV clocks; `done` pulses as the port returns to idle. Frames sent back
// to back start every (2*24 + 2) * CLK_DIV + 1 clocks.
module spi_dac_master
  import idsac_pkg::*;
#(
  parameter int unsigned CLK_DIV = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  dac_word_t  req,
  output logic       done,
  output logic       sclk,
  output logic       mosi,
  output logic       cs_n
);
  localparam int unsigned FW = $bits(dac_word_t);
  localparam int unsigned DW = $clog2(CLK_DIV + 1);

  typedef enum logic [1:0] {S_IDLE, S_LEAD, S_SHIFT, S_TRAIL} state_e;
  state_e             state;
  logic [FW-1:0]      shreg;
  logic [$clog2(FW)-1:0] nbit;
  logic [DW-1:0]      div;

  assign req_ready = (state == S_IDLE);
  assign mosi      = shreg[FW-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      shreg <= '0;
      nbit  <= '0;
      div   <= '0;
      sclk  <= 1'b0;
      cs_n  <= 1'b1;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          shreg <= req;
          cs_n  <= 1'b0;
          div   <= DW'(CLK_DIV - 1);
          nbit  <= '0;
          state <= S_LEAD;
        end
        S_LEAD: begin
          if (div != '0) div <= div - 1'b1;
          else begin
            sclk  <= 1'b1;
            div   <= DW'(CLK_DIV - 1);
            state <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          if (div != '0) div <= div - 1'b1;
          else if (sclk) begin
            sclk <= 1'b0;
            div  <= DW'(CLK_DIV - 1);
            if (nbit == $bits(nbit)'(FW - 1)) begin
              state <= S_TRAIL;
            end else begin
              shreg <= {shreg[FW-2:0], 1'b0};
              nbit  <= nbit + 1'b1;
            end
          end else begin
            sclk <= 1'b1;
            div  <= DW'(CLK_DIV - 1);
          end
        end
        S_TRAIL: begin
          if (div != '0) div <= div - 1'b1;
          else if (!cs_n) begin
            cs_n <= 1'b1;
            div  <= DW'(CLK_DIV - 1);
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Bus rules: SCLK only toggles inside a frame; the request is taken only
  // from idle.
  a_sclk_in_frame: assert property (@(posedge clk) disable iff (!rst_n) sclk |-> !cs_n);
  a_req_idle:      assert property (@(posedge clk) disable iff (!rst_n)
                                    (req_valid && req_ready) |=> (state == S_LEAD));

endmodule
