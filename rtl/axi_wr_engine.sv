// axi_wr_engine: writes a stream of 256-bit beats to consecutive HBM
// addresses as fixed-length AXI3 INCR bursts.
//
// After start, it issues n_bursts bursts of BURST beats from address base:
// address phase first, then the BURST data beats of that burst taken from the
// s_* stream, then the next burst. Write responses are counted and done rises
// once every burst has been answered. One burst is in flight on the address
// and data channels at a time. This helper is part of the per-channel memory
// controller; its burst scheme is this design's choice.
//
// Timing: one beat per cycle while the memory is ready; one extra cycle per
// burst for the address. done stays high until the next start.
// Reset: synchronous, active low.
module axi_wr_engine #(
  parameter int unsigned DATA_W = 256,
  parameter int unsigned ADDR_W = 28,
  parameter int unsigned BURST  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [15:0]       n_bursts,
  output logic              done,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [DATA_W-1:0] s_data,
  output logic              awvalid,
  input  logic              awready,
  output logic [ADDR_W-1:0] awaddr,
  output logic [3:0]        awlen,
  output logic              wvalid,
  input  logic              wready,
  output logic [DATA_W-1:0] wdata,
  output logic              wlast,
  input  logic              bvalid,
  output logic              bready
);
  localparam int unsigned BEAT_BYTES = DATA_W / 8;
  localparam int unsigned BW = (BURST > 1) ? $clog2(BURST) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_e;
  state_e        state;
  logic [15:0]   burst_cnt, resp_cnt, total;
  logic [BW-1:0] beat;

  assign awvalid = (state == S_ADDR);
  assign awaddr  = base + ADDR_W'(burst_cnt) * ADDR_W'(BURST * BEAT_BYTES);
  assign awlen   = 4'(BURST - 1);
  assign wvalid  = (state == S_DATA) && s_valid;
  assign wdata   = s_data;
  assign wlast   = (beat == BW'(BURST - 1));
  assign s_ready = (state == S_DATA) && wready;
  assign bready  = 1'b1;
  assign done    = (state == S_IDLE) && (resp_cnt == total);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      burst_cnt <= '0;
      resp_cnt  <= '0;
      total     <= '0;
      beat      <= '0;
    end else begin
      if (bvalid) resp_cnt <= resp_cnt + 16'd1;
      case (state)
        S_IDLE: if (start) begin
          total     <= n_bursts;
          burst_cnt <= '0;
          resp_cnt  <= '0;
          beat      <= '0;
          if (n_bursts != 0) state <= S_ADDR;
        end
        S_ADDR: if (awready) state <= S_DATA;
        S_DATA: if (wvalid && wready) begin
          if (wlast) begin
            beat      <= '0;
            burst_cnt <= burst_cnt + 16'd1;
            state     <= (burst_cnt + 16'd1 == total) ? S_IDLE : S_ADDR;
          end else begin
            beat <= beat + BW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) awvalid && !awready |=> awvalid && $stable(awaddr))
    else $error("axi_wr_engine: AW dropped before accepted");

endmodule
