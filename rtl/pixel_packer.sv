// pixel_packer: merges the four video channels into one host word stream.
//
// Each SBC digitises up to four CCD outputs at once, so every pixel period
// brings one DCDS result per channel. The host link carries one 16-bit word
// stream; this block holds each channel's latest pixel and writes the held
// pixels into a FIFO, lowest channel first, one word per clock. With the
// channels in step (the normal case) a pixel period produces the words
// ch0, ch1, ch2, ch3 in that order. The FIFO absorbs the host link's pauses.
//
// `ovf` is a sticky flag, cleared by `clr`: it is set when a channel brings a
// new pixel while its previous one is still waiting, i.e. the FIFO stayed
// full for a whole pixel period and data was lost. The ordering and the FIFO
// depth are this design's choices. Output is a valid/ready stream.
module pixel_packer #(
  parameter int unsigned N_CH       = 4,
  parameter int unsigned WIDTH      = 16,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic [N_CH-1:0][WIDTH-1:0]    pix_data,
  input  logic [N_CH-1:0]               pix_valid,
  output logic [WIDTH-1:0]              out_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic                          ovf,
  output logic [$clog2(FIFO_DEPTH):0]   level
);
  logic [N_CH-1:0][WIDTH-1:0] hold;
  logic [N_CH-1:0]            pend;
  logic                       full, empty;

  // lowest pending channel
  logic                      any;
  logic [$clog2(N_CH)-1:0]   sel;
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = N_CH - 1; i >= 0; i--) begin
      if (pend[i]) begin
        any = 1'b1;
        sel = $bits(sel)'(i);
      end
    end
  end

  wire push = any && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0;
      pend <= '0;
      ovf  <= 1'b0;
    end else begin
      if (clr) ovf <= 1'b0;
      if (push) pend[sel] <= 1'b0;
      for (int i = 0; i < N_CH; i++) begin
        if (pix_valid[i]) begin
          if (pend[i] && !(push && sel == $bits(sel)'(i))) ovf <= 1'b1;
          hold[i] <= pix_data[i];
          pend[i] <= 1'b1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en   (push),
    .wr_data (hold[sel]),
    .full,
    .rd_en   (out_ready),
    .rd_data (out_data),
    .empty,
    .count   (level)
  );

  assign out_valid = !empty;

endmodule
