// sync_fifo: single-clock first-in first-out buffer.
//
// Stores up to DEPTH words of WIDTH bits in a memory array. A word is written
// when `wr_en` is high and the FIFO is not full, and read when `rd_en` is high
// and it is not empty; `rd_data` shows the oldest word whenever `empty` is
// low (first-word fall-through, read asynchronously from the array).
// `count` is the number of words held. DEPTH must be a power of two.
// The controller's description mentions no buffering; this FIFO is this
// design's addition between the video channels and the host link.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign count   = wp - rp;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  // The occupancy can never exceed the depth.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
