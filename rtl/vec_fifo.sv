// vec_fifo: synchronous first-in first-out buffer of fixed-width vectors.
//
// Used for the input buffers (one input per array row per entry), the weight
// buffers (one weight per array column per entry) and the output buffers (one
// row of ADC codes per entry) of the MAC-DO test circuit. The paper names
// these buffers but does not describe them; a plain FIFO with a valid/ready
// handshake on both sides is this design's choice.
//
// Interface: an entry is written on a clock edge where push_valid and
// push_ready are both high, and removed where pop_valid and pop_ready are both
// high. pop_data shows the oldest entry whenever pop_valid is high (first-word
// fall-through, zero read latency). Push and pop may happen in the same cycle.
// Synchronous active-high reset empties the buffer.
module vec_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [WIDTH-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [WIDTH-1:0] pop_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  assign push_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rd_ptr];
  assign level      = count;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // A full buffer never accepts, an empty one never delivers.
  assert property (@(posedge clk) disable iff (rst) (count == 0) |-> !pop_valid);
  assert property (@(posedge clk) disable iff (rst) int'(count) <= DEPTH);
endmodule
