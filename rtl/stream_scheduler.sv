// stream_scheduler: spreads the windows of a job over the PEs and gathers
// their results.
//
// A job is a number of windows that arrive back to back on the input
// stream, each IN_LINES cache lines long. Window w goes to PE w mod NUM_PE,
// so the work is divided evenly and all PEs run in parallel. Results are
// collected in the same order (OUT_LINES lines of window 0 from PE 0, then
// window 1 from PE 1, ...), so the output stream is in window order without
// any reordering memory. The job ends, with a one-cycle job_done pulse, when
// the last result line has left. That jobs are executed as streams that
// decide which data goes to which part of the PE array is the paper's; the
// round-robin window assignment and in-order collection are this design's
// choices.
//
// Interface: job_start with job_windows starts a job (ignored while busy);
// in_* / out_* 1024-bit valid/ready streams toward the host side; pe_in_* /
// pe_out_* arrays of streams toward the channel controllers.
// Timing: routing is combinational (no added latency); input and output
// sides advance independently, so input of later windows overlaps the
// computation and output of earlier ones.
// Reset: synchronous, active low.
module stream_scheduler #(
  parameter int unsigned W         = 1024,
  parameter int unsigned NUM_PE    = 14,
  parameter int unsigned IN_LINES  = 1024,
  parameter int unsigned OUT_LINES = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         job_start,
  input  logic [31:0]  job_windows,
  output logic         busy,
  output logic         job_done,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         pe_in_valid  [NUM_PE],
  input  logic         pe_in_ready  [NUM_PE],
  output logic [W-1:0] pe_in_data   [NUM_PE],
  input  logic         pe_out_valid [NUM_PE],
  output logic         pe_out_ready [NUM_PE],
  input  logic [W-1:0] pe_out_data  [NUM_PE]
);
  localparam int unsigned PW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  logic [31:0]   n_windows, in_win, out_win, in_line, out_line;
  logic [PW-1:0] in_pe, out_pe;
  logic          in_active, in_fire, out_fire;

  assign in_active = busy && (in_win != n_windows);
  assign in_ready  = in_active && pe_in_ready[in_pe];
  assign in_fire   = in_valid && in_ready;
  assign out_valid = busy && pe_out_valid[out_pe];
  assign out_data  = pe_out_data[out_pe];
  assign out_fire  = out_valid && out_ready;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    assign pe_in_valid[p]  = in_active && in_valid && (in_pe == PW'(p));
    assign pe_in_data[p]   = in_data;
    assign pe_out_ready[p] = busy && out_ready && (out_pe == PW'(p));
  end

  function automatic logic [PW-1:0] next_pe(input logic [PW-1:0] p);
    return (p == PW'(NUM_PE - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      job_done  <= 1'b0;
      n_windows <= '0;
      in_win    <= '0;
      out_win   <= '0;
      in_line   <= '0;
      out_line  <= '0;
      in_pe     <= '0;
      out_pe    <= '0;
    end else begin
      job_done <= 1'b0;
      if (!busy) begin
        if (job_start && job_windows != 0) begin
          busy      <= 1'b1;
          n_windows <= job_windows;
          in_win    <= '0;
          out_win   <= '0;
          in_line   <= '0;
          out_line  <= '0;
          in_pe     <= '0;
          out_pe    <= '0;
        end else if (job_start) begin
          job_done <= 1'b1;  // empty job
        end
      end else begin
        if (in_fire) begin
          if (in_line == IN_LINES - 1) begin
            in_line <= '0;
            in_win  <= in_win + 32'd1;
            in_pe   <= next_pe(in_pe);
          end else begin
            in_line <= in_line + 32'd1;
          end
        end
        if (out_fire) begin
          if (out_line == OUT_LINES - 1) begin
            out_line <= '0;
            out_win  <= out_win + 32'd1;
            out_pe   <= next_pe(out_pe);
            if (out_win + 32'd1 == n_windows) begin
              busy     <= 1'b0;
              job_done <= 1'b1;
            end
          end else begin
            out_line <= out_line + 32'd1;
          end
        end
      end
    end
  end

endmodule
