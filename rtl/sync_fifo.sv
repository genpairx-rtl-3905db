// sync_fifo -- single-clock FIFO on a circular buffer.
//
// A WIDTH x DEPTH array with a write pointer, a read pointer and an
// occupancy count; the storage maps onto a dual-port SRAM. The head entry is
// visible on rd_data whenever rd_valid is high (first-word fall-through),
// and is removed on rd_valid && rd_ready. wr_ready is low when full. Used
// for the per-channel FIFOs in front of the memory channels and for the
// circular buffers of the pipeline. Reset empties it; the array is not
// cleared.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign wr_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= incr(wptr);
      if (do_rd) rptr <= incr(rptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end
endmodule
