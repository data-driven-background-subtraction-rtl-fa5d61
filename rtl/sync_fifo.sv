// sync_fifo: single-clock first-in first-out buffer.
//
// Sits in front of each background subtraction core and holds pixel jobs
// (pixel value plus its stored model) loaded from external memory, so that
// memory latency is hidden from the core. A circular array of DEPTH entries
// with read and write pointers and an occupancy counter.
// Interface: valid/ready on both sides. A write happens when in_valid and
// in_ready are both high; a read when out_valid and out_ready are both high.
// out_data shows the head entry combinationally (first-word fall-through), so
// an entry can be read the cycle after it was written. Full throughput of one
// entry per cycle in and out. The source design names the FIFO but gives no
// depth; DEPTH defaults to 4 here.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  logic do_wr, do_rd;
  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // the occupancy never exceeds the depth, and a full FIFO never accepts
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH[$bits(count)-1:0]);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (count == DEPTH[$bits(count)-1:0]) |-> !in_ready);
endmodule
