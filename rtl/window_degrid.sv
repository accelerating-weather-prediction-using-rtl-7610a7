// window_degrid: output buffer and degridding for the vertical-advection PE.
//
// The backward sweep of the Thomas solver produces results from the top
// level of the window down to level 0, but the output stream must leave in
// window order (level 0 first, the GROUPS column groups of a level in order).
// This block writes each incoming 1024-bit result line into an on-chip
// buffer at its (level, group) slot, and once the whole window is in, streams
// the lines out in window order. With REVERSE = 0 it keeps arrival order and
// only buffers. That results go through an output buffer and a degridding
// step to a single 1024-bit output stream is the paper's; the slot order and
// the collect-then-emit schedule are this design's choices.
//
// Interface: in_* and out_* valid/ready 1024-bit streams.
// Timing: collect phase accepts one line per cycle (DEPTH*GROUPS lines), then
// emit phase offers one line per cycle; in_ready is low while emitting.
// Reset: synchronous, active low, returns to the collect phase.
module window_degrid #(
  parameter int unsigned W       = 1024,
  parameter int unsigned GROUPS  = 4,
  parameter int unsigned DEPTH   = 64,
  parameter bit          REVERSE = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned N  = GROUPS * DEPTH;
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned KW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  buf_mem [N];
  logic          emitting;
  logic [GW-1:0] in_g;
  logic [KW-1:0] in_k;
  logic [AW-1:0] out_idx;
  logic [AW-1:0] wr_addr;
  logic [KW-1:0] slot_k;

  assign slot_k   = REVERSE ? KW'(DEPTH - 1) - in_k : in_k;
  assign wr_addr  = AW'(slot_k) * AW'(GROUPS) + AW'(in_g);
  assign in_ready = !emitting;
  assign out_valid = emitting;
  assign out_data  = buf_mem[out_idx];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buf_mem[wr_addr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      emitting <= 1'b0;
      in_g     <= '0;
      in_k     <= '0;
      out_idx  <= '0;
    end else if (!emitting) begin
      if (in_valid) begin
        if (in_g == GW'(GROUPS - 1)) begin
          in_g <= '0;
          if (in_k == KW'(DEPTH - 1)) begin
            in_k     <= '0;
            emitting <= 1'b1;
          end else begin
            in_k <= in_k + KW'(1);
          end
        end else begin
          in_g <= in_g + GW'(1);
        end
      end
    end else if (out_ready) begin
      if (out_idx == AW'(N - 1)) begin
        out_idx  <= '0;
        emitting <= 1'b0;
      end else begin
        out_idx <= out_idx + AW'(1);
      end
    end
  end

endmodule
