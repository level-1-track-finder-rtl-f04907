// list_buffer -- append-only buffer that carries the results of one
// processing step to the next (for example the tracklets of an event).
//
// The producer appends one entry per clock with wr_en; entries beyond DEPTH
// are dropped and counted in n_overflow.  The consumer reads any entry by
// index (asynchronous read) and knows how many are held from count.  clear
// empties the buffer between events.
//
// Interface: wr_en/wr_data, rd_idx/rd_data, count, n_overflow, clear.
// Timing: a write is visible on rd_data the clock after wr_en.
// From the description: memories carry results between steps.  Own choices:
// DEPTH, append-only organisation, overflow by dropping.
module list_buffer #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 64,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  T              wr_data,
  input  logic [AW-1:0] rd_idx,
  output T              rd_data,
  output logic [AW:0]   count,
  output logic [15:0]   n_overflow
);

  T mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count      <= '0;
      n_overflow <= '0;
    end else if (clear) begin
      count      <= '0;
      n_overflow <= '0;
    end else if (wr_en) begin
      if (count == (AW+1)'(DEPTH)) n_overflow <= n_overflow + 16'd1;
      else                         count      <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear && count != (AW+1)'(DEPTH))
      mem[count[AW-1:0]] <= wr_data;
  end

  assign rd_data = mem[rd_idx];

endmodule
