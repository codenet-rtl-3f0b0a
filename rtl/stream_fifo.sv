// stream_fifo: synchronous FIFO with a valid/ready handshake on both sides.
//
// The accelerator's engines are connected only through queues like this one:
// the Inputs, Offsets and Outputs streams and the link between the 1x1 and
// the 3x3 engine.  A word is written when wr_valid && wr_ready and read when
// rd_valid && rd_ready; the head of the queue is visible on rd_data while
// rd_valid is high (first-word fall-through), so a word written in one cycle
// can be read in the next.  A simultaneous read and write when full is not
// allowed (wr_ready is low).  almost_full rises when fewer than AF_MARGIN
// slots are free; the engines use it to stop issuing work whose results are
// still in their pipelines.  The queue itself is from the paper's
// description of the dataflow engine; depth, handshake and reset
// (synchronous, active low, empties the queue) are this design's choices.
module stream_fifo #(
  parameter int WIDTH     = 128,
  parameter int DEPTH     = 16,
  parameter int AF_MARGIN = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [WIDTH-1:0]           wr_data,
  output logic                       rd_valid,
  input  logic                       rd_ready,
  output logic [WIDTH-1:0]           rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       almost_full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign wr_ready    = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid    = (count != '0);
  assign rd_data     = mem[rptr];
  assign almost_full = (int'(count) > DEPTH - AF_MARGIN);
  assign do_wr       = wr_valid && wr_ready;
  assign do_rd       = rd_valid && rd_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  // occupancy can never pass the depth
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                  int'(count) <= DEPTH)
    else $error("stream_fifo: occupancy above depth");

endmodule
