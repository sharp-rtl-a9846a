// sharp_fifo: the local FIFO placed between pipeline stages of the accelerator
// to decouple a producer from its consumer.
//
// A synchronous FIFO of DEPTH entries of WIDTH bits with a valid/ready handshake
// on both sides: an entry is written when push_valid && push_ready and removed
// when pop_valid && pop_ready. pop_data shows the oldest entry combinationally
// (first-word fall-through). count gives the occupancy so that an upstream
// credit scheme can throttle a producer that cannot itself stall. Depth and
// handshake are this design's choice; only the presence of local FIFOs at the
// pipeline stages comes from the accelerator's description.
module sharp_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_valid,
  output logic                       push_ready,
  input  logic [WIDTH-1:0]           push_data,
  output logic                       pop_valid,
  input  logic                       pop_ready,
  output logic [WIDTH-1:0]           pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign push_ready = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // Occupancy can never exceed the depth.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
