`timescale 1ns/1ps
// hit_fifo: the chip-wide buffer that holds hit records for one pulse train.
//
// A synchronous first-in first-out memory of DEPTH words of W bits. Records
// are written during the pulse train and read out after it. The read side
// is show-ahead: rd_data is the oldest word whenever empty is low, and
// rd_en pops it at the clock edge. A write while full is refused: the
// record is dropped and drop_count (saturating) counts it, so overflow is
// visible in the readout. A simultaneous read and write when full still
// refuses the write (the full flag is decided before the read).
// The paper names a FIFO serving the entire chip; its depth, its overflow
// policy and the show-ahead read are this design's choices. DEPTH must be a
// power of two.
module hit_fifo #(
  parameter int unsigned W     = 27,
  parameter int unsigned DEPTH = lstfe_pkg::DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [W-1:0]                wr_data,
  input  logic                        rd_en,
  output logic [W-1:0]                rd_data,
  output logic                        empty,
  output logic                        full,
  output logic [AW:0]                 count,
  output logic [lstfe_pkg::CNT_W-1:0] drop_count
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;   // one extra bit tells full from empty
  logic         do_wr, do_rd;

  always_comb begin
    count   = wr_ptr - rd_ptr;
    empty   = (wr_ptr == rd_ptr);
    full    = (count == (AW+1)'(DEPTH));
    do_wr   = wr_en && !full;
    do_rd   = rd_en && !empty;
    rd_data = mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      drop_count <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (wr_en && full && !(&drop_count)) drop_count <= drop_count + 1'b1;
    end
  end

  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
