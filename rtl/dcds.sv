// dcds: digital correlated double sampler for one video channel.
//
// A CCD pixel is read as two levels: the reset (reference) level after the
// reset gate has been pulsed, and the signal level after the charge has been
// dumped onto the output node. Correlated double sampling takes their
// difference, which removes the kTC reset noise. Here it is done on ADC
// samples: several samples are taken on each level (3, 4 or 5 in the
// controller's measurements), each group is averaged, and
//
//     pixel = floor(sum_ref / n_ref) - floor(sum_sig / n_sig)
//
// clamped at 0 (charge lowers the output, so the signal
// level lies below the reference level). An empty group averages to 0.
//
// Samples arrive from adc_serial_rx with a tag {sig, ref} telling in which
// window of the pixel timing they were converted. A sample tagged `ref` is
// added to the reference group, one tagged `sig` to the signal group. The
// pixel closes at the first sample that is not tagged `sig` after at least
// one that was, and both groups restart empty. The two means are then found
// by a bit-serial divider, so the result appears on `pix_data` with a
// one-clock `pix_valid` SW+3 = ADC_BITS+clog2(MAX_SAMP+1)+3 clocks (23 at
// the defaults) after that sample, well inside the shortest pixel period.
// The number of samples per level is therefore set by the window lengths in the waveform
// table, not by a register here. Samples beyond MAX_SAMP in one group are
// dropped and raise `ovf` with the pixel; so does a pixel that closes less
// than SW+3 clocks after the previous one (which is then lost).
//
// The averaging arithmetic and this self-timed closing of a pixel are this
// design's choices; the controller's description gives the method and rates.
module dcds #(
  parameter int unsigned ADC_BITS = 16,
  parameter int unsigned MAX_SAMP = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADC_BITS-1:0]  s_data,
  input  logic [1:0]           s_tag,     // {sig, ref}
  input  logic                 s_valid,
  output logic [ADC_BITS-1:0]  pix_data,
  output logic                 pix_valid,
  output logic                 ovf        // a group exceeded MAX_SAMP (with pix_valid)
);
  localparam int unsigned NW = $clog2(MAX_SAMP + 1);
  localparam int unsigned SW = ADC_BITS + NW;

  logic [SW-1:0] sum_ref, sum_sig;
  logic [NW-1:0] n_ref, n_sig;
  logic          dropped;

  // Frozen copy of the closed pixel, divided in the next clock.
  logic [SW-1:0] c_sum_ref, c_sum_sig;
  logic [NW-1:0] c_n_ref, c_n_sig;
  logic          c_drop, c_go;

  wire is_ref = s_valid && s_tag[0];
  wire is_sig = s_valid && s_tag[1] && !s_tag[0];
  wire close  = s_valid && !s_tag[1] && (n_sig != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_ref <= '0; sum_sig <= '0;
      n_ref   <= '0; n_sig   <= '0;
      dropped <= 1'b0;
      c_sum_ref <= '0; c_sum_sig <= '0;
      c_n_ref   <= '0; c_n_sig   <= '0;
      c_drop    <= 1'b0; c_go <= 1'b0;
    end else begin
      c_go <= 1'b0;
      if (close) begin
        c_sum_ref <= sum_ref; c_sum_sig <= sum_sig;
        c_n_ref   <= n_ref;   c_n_sig   <= n_sig;
        c_drop    <= dropped;
        c_go      <= 1'b1;
        // the closing sample may already open the next pixel's reference group
        sum_ref <= is_ref ? SW'(s_data) : '0;
        n_ref   <= is_ref ? NW'(1) : '0;
        sum_sig <= '0;
        n_sig   <= '0;
        dropped <= 1'b0;
      end else if (is_ref) begin
        if (n_ref == NW'(MAX_SAMP)) dropped <= 1'b1;
        else begin
          sum_ref <= sum_ref + SW'(s_data);
          n_ref   <= n_ref + 1'b1;
        end
      end else if (is_sig) begin
        if (n_sig == NW'(MAX_SAMP)) dropped <= 1'b1;
        else begin
          sum_sig <= sum_sig + SW'(s_data);
          n_sig   <= n_sig + 1'b1;
        end
      end
    end
  end

  // Averages of the closed pixel: both quotients by restoring division, one
  // quotient bit per clock, SW clocks in all.
  localparam int unsigned KW = $clog2(SW + 1);
  logic              div_busy;
  logic [KW-1:0]     k;
  logic [SW-1:0]     nr, ns;          // dividends, shifted out MSB first
  logic [SW-1:0]     qr, qs;          // quotients, shifted in
  logic [NW:0]       rr, rs;          // partial remainders
  logic [NW-1:0]     dr, ds;          // divisors (0: empty group, mean 0)
  logic              d_drop;

  wire [NW+1:0] tr = {rr, nr[SW-1]};
  wire [NW+1:0] ts = {rs, ns[SW-1]};
  wire          ger = (dr != '0) && (tr >= (NW+2)'(dr));
  wire          ges = (ds != '0) && (ts >= (NW+2)'(ds));

  logic signed [SW:0] diff;
  assign diff = $signed({1'b0, qr}) - $signed({1'b0, qs});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_busy  <= 1'b0;
      k         <= '0;
      nr <= '0; ns <= '0; qr <= '0; qs <= '0;
      rr <= '0; rs <= '0; dr <= '0; ds <= '0;
      d_drop    <= 1'b0;
      pix_data  <= '0;
      pix_valid <= 1'b0;
      ovf       <= 1'b0;
    end else begin
      pix_valid <= 1'b0;
      ovf       <= 1'b0;
      if (c_go) begin
        // a pixel closing while the previous one is still being divided
        // replaces it; the replaced pixel is reported as lost through ovf
        div_busy <= 1'b1;
        k        <= KW'(SW);
        nr <= c_sum_ref; ns <= c_sum_sig;
        dr <= c_n_ref;   ds <= c_n_sig;
        rr <= '0; rs <= '0; qr <= '0; qs <= '0;
        d_drop <= c_drop || div_busy;
      end else if (div_busy) begin
        if (k != '0) begin
          rr <= ger ? (NW+1)'(tr - (NW+2)'(dr)) : tr[NW:0];
          rs <= ges ? (NW+1)'(ts - (NW+2)'(ds)) : ts[NW:0];
          qr <= {qr[SW-2:0], ger};
          qs <= {qs[SW-2:0], ges};
          nr <= {nr[SW-2:0], 1'b0};
          ns <= {ns[SW-2:0], 1'b0};
          k  <= k - 1'b1;
        end else begin
          // both means fit ADC_BITS, so only the negative side needs a clamp
          div_busy  <= 1'b0;
          pix_data  <= (diff < 0) ? '0 : diff[ADC_BITS-1:0];
          pix_valid <= 1'b1;
          ovf       <= d_drop;
        end
      end
    end
  end

endmodule
