// axi_rd_engine: reads consecutive HBM addresses as fixed-length AXI3 INCR
// bursts and delivers the data as a stream of 256-bit beats.
//
// After start, it issues n_bursts read bursts of BURST beats from address
// base, one at a time: address, then all BURST data beats forwarded to the
// m_* stream (rready follows m_ready), then the next address. done rises when
// the last beat of the last burst has been passed on. Part of the
// per-channel memory controller; the burst scheme is this design's choice.
//
// Timing: one beat per cycle while both sides are ready; one address cycle
// plus the memory latency between bursts. done stays high until the next
// start. Reset: synchronous, active low.
module axi_rd_engine #(
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
  output logic              m_valid,
  input  logic              m_ready,
  output logic [DATA_W-1:0] m_data,
  output logic              arvalid,
  input  logic              arready,
  output logic [ADDR_W-1:0] araddr,
  output logic [3:0]        arlen,
  input  logic              rvalid,
  output logic              rready,
  input  logic [DATA_W-1:0] rdata,
  input  logic              rlast
);
  localparam int unsigned BEAT_BYTES = DATA_W / 8;

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_e;
  state_e      state;
  logic [15:0] burst_cnt, total;

  assign arvalid = (state == S_ADDR);
  assign araddr  = base + ADDR_W'(burst_cnt) * ADDR_W'(BURST * BEAT_BYTES);
  assign arlen   = 4'(BURST - 1);
  assign m_valid = (state == S_DATA) && rvalid;
  assign m_data  = rdata;
  assign rready  = (state == S_DATA) && m_ready;
  assign done    = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      burst_cnt <= '0;
      total     <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          total     <= n_bursts;
          burst_cnt <= '0;
          if (n_bursts != 0) state <= S_ADDR;
        end
        S_ADDR: if (arready) state <= S_DATA;
        S_DATA: if (rvalid && rready && rlast) begin
          burst_cnt <= burst_cnt + 16'd1;
          state     <= (burst_cnt + 16'd1 == total) ? S_IDLE : S_ADDR;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
