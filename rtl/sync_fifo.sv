// sync_fifo: single-clock first-in-first-out buffer with valid/ready ports.
//
// Every PE talks to the rest of the system through four of these: if_sw2hw
// and if_hw2sw to its software delegate, if_hw2mem and if_mem2hw to the
// memory subsystem.  The default depth of 128 entries is the fifo_os /
// fifo_mem value of the paper's example hardware configuration; the width of
// 32 bits and the valid/ready handshake are this design's choice.
//
// Write side: a word is taken on a clock edge where in_valid and in_ready are
// both high (in_ready = not full).  Read side: out_data is the oldest word
// while out_valid is high; it is removed on an edge with out_ready high.
// A word written into an empty FIFO can be read the next cycle.  count gives
// the fill level.  Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     in_ready,
  output logic                     out_valid,
  output logic [WIDTH-1:0]         out_data,
  input  logic                     out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // A producer must hold its word until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> in_valid && $stable(in_data);
  endproperty
  a_hold: assert property (p_hold);
endmodule
