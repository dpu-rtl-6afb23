// stream_fifo: synchronous FIFO with one push port and up to two pops per cycle.
//
// Used between the load streaming unit and the PE, where the PE can move two
// loaded words into its register file in one cycle (two load write ports), and
// between the PE and the store streaming unit (one pop per cycle). rd_data0 is
// the oldest entry and rd_data1 the one after it; pop_cnt (0..2) removes them
// at the clock edge. A push writes at the clock edge and must not be issued
// when the FIFO is full. count is the number of stored entries. Popping more
// entries than stored or pushing into a full FIFO is a protocol error and is
// caught by assertions. flush empties the FIFO. The depth is this design's
// choice; the paper only draws the FIFOs.
module stream_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned WIDTH = 37,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [1:0]       pop_cnt,
  output logic [WIDTH-1:0] rd_data0,
  output logic [WIDTH-1:0] rd_data1,
  output logic [CW-1:0]    count,
  output logic             full,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign full     = (count == CW'(DEPTH));
  assign empty    = (count == '0);
  assign rd_data0 = mem[rd_ptr];
  assign rd_data1 = mem[AW'((32'(rd_ptr) + 1) % DEPTH)];

  // storage, not reset
  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= AW'((32'(wr_ptr) + 1) % DEPTH);
      rd_ptr <= AW'((32'(rd_ptr) + 32'(pop_cnt)) % DEPTH);
      count  <= count + CW'(push) - CW'(pop_cnt);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("stream_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) CW'(pop_cnt) <= count)
    else $error("stream_fifo: pop of more entries than stored");

endmodule
