// hbm_bypass_switch: chooses, per window, whether a PE's data goes through
// its HBM pseudo-channel or straight from the host stream.
//
// For large grids the window is first parked in HBM and the PE reads it from
// there; for small grids the HBM round trip is not worth it and the window is
// handed to the PE's on-chip buffers directly. The switch holds the mode for a
// whole window: it is loaded from bypass_req when load is pulsed (the channel
// controller does so as a window starts) and cannot change in between.
// In bypass mode: host_in -> pe_in and pe_out -> host_out.
// In HBM mode: the HBM write path (wr) takes host_in or pe_out (wr_src_pe),
// and the HBM read path (rd) feeds pe_in or host_out (rd_dst_pe).
// That a switch can bypass the HBM for small grids is the paper's; the
// per-window latching and the routing controls are this design's choices.
//
// Interface: valid/ready streams, combinational routing; bypass shows the
// latched mode. Timing: no added latency. Reset: synchronous, active low,
// to HBM mode.
module hbm_bypass_switch #(
  parameter int unsigned W = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         bypass_req,
  output logic         bypass,
  input  logic         wr_src_pe,
  input  logic         rd_dst_pe,
  // host side
  input  logic         host_in_valid,
  output logic         host_in_ready,
  input  logic [W-1:0] host_in_data,
  output logic         host_out_valid,
  input  logic         host_out_ready,
  output logic [W-1:0] host_out_data,
  // PE side
  output logic         pe_in_valid,
  input  logic         pe_in_ready,
  output logic [W-1:0] pe_in_data,
  input  logic         pe_out_valid,
  output logic         pe_out_ready,
  input  logic [W-1:0] pe_out_data,
  // HBM write path (toward the down-converter) and read path (from the up-converter)
  output logic         wr_valid,
  input  logic         wr_ready,
  output logic [W-1:0] wr_data,
  input  logic         rd_valid,
  output logic         rd_ready,
  input  logic [W-1:0] rd_data,
  // gates from the channel controller: which paths may move data now
  input  logic         en_host_in,
  input  logic         en_pe_in,
  input  logic         en_pe_out,
  input  logic         en_host_out
);
  always_ff @(posedge clk) begin
    if (!rst_n)    bypass <= 1'b0;
    else if (load) bypass <= bypass_req;
  end

  always_comb begin
    host_in_ready  = 1'b0;
    host_out_valid = 1'b0;
    host_out_data  = pe_out_data;
    pe_in_valid    = 1'b0;
    pe_in_data     = host_in_data;
    pe_out_ready   = 1'b0;
    wr_valid       = 1'b0;
    wr_data        = host_in_data;
    rd_ready       = 1'b0;
    if (bypass) begin
      pe_in_valid    = host_in_valid && en_host_in && en_pe_in;
      host_in_ready  = pe_in_ready && en_host_in && en_pe_in;
      host_out_valid = pe_out_valid && en_pe_out && en_host_out;
      pe_out_ready   = host_out_ready && en_pe_out && en_host_out;
    end else begin
      if (wr_src_pe) begin
        wr_data      = pe_out_data;
        wr_valid     = pe_out_valid && en_pe_out;
        pe_out_ready = wr_ready && en_pe_out;
      end else begin
        wr_valid      = host_in_valid && en_host_in;
        host_in_ready = wr_ready && en_host_in;
      end
      if (rd_dst_pe) begin
        pe_in_data  = rd_data;
        pe_in_valid = rd_valid && en_pe_in;
        rd_ready    = pe_in_ready && en_pe_in;
      end else begin
        host_out_data  = rd_data;
        host_out_valid = rd_valid && en_host_out;
        rd_ready       = host_out_ready && en_host_out;
      end
    end
  end

endmodule
