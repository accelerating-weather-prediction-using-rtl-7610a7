// cacheline_buffer: FIFO of host cache lines between the OCAPI AXI side and
// the accelerator.
//
// The host link delivers 1024-bit POWER9 cache lines in bursts while the PEs
// consume them at their own pace. A 64-line buffer between the two lets the
// link run at its peak rate: the host side can keep filling free entries while
// the accelerator side drains full ones, which is the double-buffering effect
// the design relies on. The depth of 64 lines and the 1024-bit width are the
// paper's; building it as one circular FIFO rather than two ping-pong banks is
// this design's choice. The same module, at a smaller depth, serves as the
// small stream FIFOs elsewhere in the design.
//
// Interface: valid/ready streams on both sides; a line is written when
// in_valid && in_ready and read when out_valid && out_ready. count is the
// number of stored lines.
// Timing: a written line is visible at the output on the next cycle; full
// throughput of one line per cycle in and out; in_ready is low only when full.
// Reset: synchronous, active low, empties the buffer.
module cacheline_buffer #(
  parameter int unsigned W     = 1024,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH)
    else $error("cacheline_buffer: occupancy above depth");

endmodule
