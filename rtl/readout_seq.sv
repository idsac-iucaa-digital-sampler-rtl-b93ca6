// readout_seq: frame sequencer with region-of-interest readout.
//
// A CCD is read row by row. For every row the parallel (image-area) clocks
// step through a short sequence of states that moves all rows down by one,
// putting the bottom row into the serial register; then the serial clocks
// move that row out one pixel at a time past the output amplifier, where each
// pixel is digitised. The host asks for an arbitrary region of interest, plus
// prescan (dark) and overscan pixels, by giving the frame geometry:
//
//   rows_skip, rows_read   rows transferred before / inside the region
//   cols_skip              serial pixels clocked out unsampled at row start
//   cols_read, cols_over   pixels digitised: region, then overscan
//
// Dark prescan columns are read by including them in cols_read after a
// suitable cols_skip. Every row is clocked out in full (cols_skip + cols_read
// + cols_over pixels); in the rows_skip rows and the first cols_skip columns
// the pixel is clocked with `wf_sample_en` low, so nothing is digitised.
//
// Per row, state j = 0 .. n_pstates-1 of the parallel table is sent to
// parallel_clock_ctrl and held `dwell` clocks after its LDAC. Then each pixel
// is one play of waveform_gen; the next play starts in the clock in which the
// previous one reports `wf_done`, so a pixel costs the table length plus one
// clock. `frame_done` pulses at the end and `busy` is high during a frame;
// `abort` returns to idle at once. `row` and `col` give the position.
//
// The geometry registers and the order of operations are this design's
// choices: the controller's description only says that arbitrary ROI readout
// with overscan and dark pixels is generated from host-supplied parameters.
module readout_seq
  import idsac_pkg::*;
#(
  parameter int unsigned N_PSTATES = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    abort,
  input  geom_t                   geom,
  input  pstate_t                 pstates [N_PSTATES],
  // parallel clocks
  output logic                    par_req_valid,
  input  logic                    par_req_ready,
  output par_state_t              par_req_levels,
  input  logic                    par_done,
  // pixel timing
  output logic                    wf_start,
  output logic                    wf_sample_en,
  input  logic                    wf_done,
  // status
  output logic                    busy,
  output logic                    frame_done,
  output logic [16:0]             row,
  output logic [16:0]             col
);
  localparam int unsigned PW = $clog2(N_PSTATES);

  typedef enum logic [2:0] {Q_IDLE, Q_PREQ, Q_PWAIT, Q_DWELL, Q_SSTART, Q_SWAIT} qstate_e;
  qstate_e      st;
  logic [PW:0]  pidx;
  logic [15:0]  dwell;

  wire [16:0] n_rows = 17'(geom.rows_skip) + 17'(geom.rows_read);
  wire [17:0] n_cols = 18'(geom.cols_skip) + 18'(geom.cols_read) + 18'(geom.cols_over);
  wire        last_col = (18'(col) + 18'd1 >= n_cols);
  wire        last_row = (row + 17'd1 >= n_rows);
  wire        row_read = (row >= 17'(geom.rows_skip));

  assign busy           = (st != Q_IDLE);
  assign par_req_valid  = (st == Q_PREQ);
  assign par_req_levels = pstates[PW'(pidx)].levels;

  // Start of a pixel: first of a row, or back to back with the previous one.
  always_comb begin
    wf_start     = 1'b0;
    wf_sample_en = 1'b0;
    if (st == Q_SSTART) begin
      wf_start     = 1'b1;
      wf_sample_en = row_read && (col >= 17'(geom.cols_skip));
    end else if (st == Q_SWAIT && wf_done && !last_col && !abort) begin
      wf_start     = 1'b1;
      wf_sample_en = row_read && (col + 17'd1 >= 17'(geom.cols_skip));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= Q_IDLE;
      pidx       <= '0;
      dwell      <= '0;
      row        <= '0;
      col        <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (abort) begin
        st <= Q_IDLE;
      end else begin
        case (st)
          Q_IDLE: if (start && n_rows != '0 && n_cols != '0 && geom.n_pstates != '0) begin
            row  <= '0;
            col  <= '0;
            pidx <= '0;
            st   <= Q_PREQ;
          end
          Q_PREQ:  if (par_req_ready) st <= Q_PWAIT;
          Q_PWAIT: if (par_done) begin
            dwell <= pstates[PW'(pidx)].dwell;
            st    <= Q_DWELL;
          end
          Q_DWELL: begin
            if (dwell != '0) dwell <= dwell - 1'b1;
            else if (pidx + 1'b1 < (PW+1)'(geom.n_pstates)) begin
              pidx <= pidx + 1'b1;
              st   <= Q_PREQ;
            end else begin
              col <= '0;
              st  <= Q_SSTART;
            end
          end
          Q_SSTART: st <= Q_SWAIT;
          Q_SWAIT: if (wf_done) begin
            if (!last_col) begin
              col <= col + 1'b1;
            end else if (!last_row) begin
              row  <= row + 1'b1;
              pidx <= '0;
              st   <= Q_PREQ;
            end else begin
              frame_done <= 1'b1;
              st         <= Q_IDLE;
            end
          end
          default: st <= Q_IDLE;
        endcase
      end
    end
  end

  // Handshake: a parallel-state request is held, unchanged, until taken.
  a_par_req_held: assert property (@(posedge clk) disable iff (!rst_n || abort)
                                   (par_req_valid && !par_req_ready) |=>
                                   (par_req_valid && $stable(par_req_levels)));

endmodule
