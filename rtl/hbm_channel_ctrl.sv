// hbm_channel_ctrl: memory-channel controller of one PE. It moves each window
// between the host stream, the PE's own HBM pseudo-channel and the PE.
//
// Each PE has a dedicated HBM pseudo-channel, so PEs never compete for memory
// bandwidth. For every window the controller runs three phases:
//   WRITE_IN  the window's IN_LINES cache lines arrive from the host, are cut
//             into 256-bit beats and written to HBM from address 0;
//   COMPUTE   the window is read back, reassembled into cache lines and fed
//             to the PE; at the same time the PE's OUT_LINES result lines are
//             written to HBM right after the input window;
//   DRAIN     the results are read back and sent toward the host.
// With the bypass switch set for a window (small grids), the phases are
// replaced by one BYPASS phase in which the host lines go straight to the PE
// and its results straight back. The mode is taken from bypass_req when a
// window's first line arrives.
// The dedicated channel per PE, the 256/1024-bit stream conversion, the HBM
// bypass switch and the host -> HBM -> PE -> HBM -> host order of a window
// are the paper's; the address layout, the AXI3 burst scheme (16-beat INCR,
// one burst in flight per direction) and the phase-by-phase schedule are this
// design's choices.
//
// Interface: host_in/host_out and pe_in/pe_out: 1024-bit valid/ready
// streams; hbm_req/hbm_rsp: simplified AXI3 master port (see nero_pkg);
// bypass_req: mode for the next window; busy: a window is in progress;
// windows_done: windows completed since reset; phase: current phase.
// Timing: WRITE_IN and DRAIN move one beat per cycle (four per line) plus one
// address cycle and the memory latency per 16-beat burst.
// Reset: synchronous, active low, to IDLE.
module hbm_channel_ctrl
  import nero_pkg::*;
#(
  parameter int unsigned IN_LINES  = 1024,
  parameter int unsigned OUT_LINES = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bypass_req,
  output logic              busy,
  output logic [1:0]        phase_id,     // 0 idle/write-in, 1 compute, 2 drain, 3 bypass
  output logic [31:0]       windows_done,
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  logic [LINE_W-1:0] host_in_data,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output logic [LINE_W-1:0] host_out_data,
  output logic              pe_in_valid,
  input  logic              pe_in_ready,
  output logic [LINE_W-1:0] pe_in_data,
  input  logic              pe_out_valid,
  output logic              pe_out_ready,
  input  logic [LINE_W-1:0] pe_out_data,
  output hbm_req_t          hbm_req,
  input  hbm_rsp_t          hbm_rsp
);
  localparam int unsigned RATIO       = LINE_W / HBM_W;
  localparam int unsigned LINE_BYTES  = LINE_W / 8;
  localparam int unsigned IN_BURSTS   = IN_LINES * RATIO / HBM_BURST;
  localparam int unsigned OUT_BURSTS  = OUT_LINES * RATIO / HBM_BURST;
  localparam logic [HBM_ADDR_W-1:0] OUT_BASE = HBM_ADDR_W'(IN_LINES * LINE_BYTES);

  initial assert ((IN_LINES * RATIO) % HBM_BURST == 0 && (OUT_LINES * RATIO) % HBM_BURST == 0)
    else $fatal(1, "hbm_channel_ctrl: window is not a whole number of bursts");

  typedef enum logic [2:0] {S_IDLE, S_WRITE_IN, S_COMPUTE, S_DRAIN, S_BYPASS} state_e;
  state_e state;

  // switch <-> converter wiring
  logic              wr_valid, wr_ready, rd_valid, rd_ready;
  logic [LINE_W-1:0] wr_data, rd_data;
  logic              nb_wr_valid, nb_wr_ready, nb_rd_valid, nb_rd_ready;
  logic [HBM_W-1:0]  nb_wr_data, nb_rd_data;
  logic              bypass, load;
  logic              wr_start, rd_start, wr_done, rd_done;
  logic [HBM_ADDR_W-1:0] wr_base, rd_base;
  logic [15:0]       wr_bursts, rd_bursts;
  logic [31:0]       in_cnt, out_cnt;
  logic              en_host_in, en_pe_in, en_pe_out, en_host_out;
  logic              host_in_fire, host_out_fire;

  assign load = (state == S_IDLE) && host_in_valid;
  assign busy = (state != S_IDLE);
  assign host_in_fire  = host_in_valid && host_in_ready;
  assign host_out_fire = host_out_valid && host_out_ready;

  always_comb begin
    en_host_in  = 1'b0;
    en_pe_in    = 1'b0;
    en_pe_out   = 1'b0;
    en_host_out = 1'b0;
    unique case (state)
      S_WRITE_IN: en_host_in = 1'b1;
      S_COMPUTE:  begin en_pe_in = 1'b1; en_pe_out = 1'b1; end
      S_DRAIN:    en_host_out = 1'b1;
      S_BYPASS:   begin
        en_host_in  = (in_cnt != IN_LINES);
        en_pe_in    = 1'b1;
        en_pe_out   = 1'b1;
        en_host_out = 1'b1;
      end
      default: ;
    endcase
  end

  always_comb begin
    unique case (state)
      S_COMPUTE: phase_id = 2'd1;
      S_DRAIN:   phase_id = 2'd2;
      S_BYPASS:  phase_id = 2'd3;
      default:   phase_id = 2'd0;
    endcase
  end

  hbm_bypass_switch #(.W(LINE_W)) u_switch (
    .clk, .rst_n, .load, .bypass_req, .bypass,
    .wr_src_pe(state == S_COMPUTE), .rd_dst_pe(state == S_COMPUTE),
    .host_in_valid, .host_in_ready, .host_in_data,
    .host_out_valid, .host_out_ready, .host_out_data,
    .pe_in_valid, .pe_in_ready, .pe_in_data,
    .pe_out_valid, .pe_out_ready, .pe_out_data,
    .wr_valid, .wr_ready, .wr_data, .rd_valid, .rd_ready, .rd_data,
    .en_host_in, .en_pe_in, .en_pe_out, .en_host_out
  );

  stream_converter #(.WIDE_W(LINE_W), .NARROW_W(HBM_W)) u_conv (
    .clk, .rst_n,
    .dn_in_valid(wr_valid), .dn_in_ready(wr_ready), .dn_in_data(wr_data),
    .dn_out_valid(nb_wr_valid), .dn_out_ready(nb_wr_ready), .dn_out_data(nb_wr_data),
    .up_in_valid(nb_rd_valid), .up_in_ready(nb_rd_ready), .up_in_data(nb_rd_data),
    .up_out_valid(rd_valid), .up_out_ready(rd_ready), .up_out_data(rd_data)
  );

  axi_wr_engine #(.DATA_W(HBM_W), .ADDR_W(HBM_ADDR_W), .BURST(HBM_BURST)) u_wr (
    .clk, .rst_n, .start(wr_start), .base(wr_base), .n_bursts(wr_bursts), .done(wr_done),
    .s_valid(nb_wr_valid), .s_ready(nb_wr_ready), .s_data(nb_wr_data),
    .awvalid(hbm_req.awvalid), .awready(hbm_rsp.awready), .awaddr(hbm_req.awaddr),
    .awlen(hbm_req.awlen), .wvalid(hbm_req.wvalid), .wready(hbm_rsp.wready),
    .wdata(hbm_req.wdata), .wlast(hbm_req.wlast), .bvalid(hbm_rsp.bvalid), .bready(hbm_req.bready)
  );

  axi_rd_engine #(.DATA_W(HBM_W), .ADDR_W(HBM_ADDR_W), .BURST(HBM_BURST)) u_rd (
    .clk, .rst_n, .start(rd_start), .base(rd_base), .n_bursts(rd_bursts), .done(rd_done),
    .m_valid(nb_rd_valid), .m_ready(nb_rd_ready), .m_data(nb_rd_data),
    .arvalid(hbm_req.arvalid), .arready(hbm_rsp.arready), .araddr(hbm_req.araddr),
    .arlen(hbm_req.arlen), .rvalid(hbm_rsp.rvalid), .rready(hbm_req.rready),
    .rdata(hbm_rsp.rdata), .rlast(hbm_rsp.rlast)
  );

  // Phase sequencing. Engines are started on the transition into a phase and
  // their done flags are looked at from the next cycle on.
  logic started;

  always_comb begin
    wr_start  = 1'b0;
    rd_start  = 1'b0;
    wr_base   = '0;
    rd_base   = '0;
    wr_bursts = 16'(IN_BURSTS);
    rd_bursts = 16'(IN_BURSTS);
    unique case (state)
      S_WRITE_IN: begin
        wr_start = !started;
      end
      S_COMPUTE: begin
        rd_start  = !started;
        wr_start  = !started;
        wr_base   = OUT_BASE;
        wr_bursts = 16'(OUT_BURSTS);
      end
      S_DRAIN: begin
        rd_start  = !started;
        rd_base   = OUT_BASE;
        rd_bursts = 16'(OUT_BURSTS);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      started      <= 1'b0;
      in_cnt       <= '0;
      out_cnt      <= '0;
      windows_done <= '0;
    end else begin
      if (host_in_fire)  in_cnt  <= in_cnt + 32'd1;
      if (host_out_fire) out_cnt <= out_cnt + 32'd1;
      unique case (state)
        S_IDLE: begin
          started <= 1'b0;
          in_cnt  <= '0;
          out_cnt <= '0;
          if (host_in_valid) state <= bypass_req ? S_BYPASS : S_WRITE_IN;
        end
        S_WRITE_IN: begin
          started <= 1'b1;
          if (started && wr_done) begin
            state   <= S_COMPUTE;
            started <= 1'b0;
          end
        end
        S_COMPUTE: begin
          started <= 1'b1;
          if (started && wr_done && rd_done) begin
            state   <= S_DRAIN;
            started <= 1'b0;
          end
        end
        S_DRAIN: begin
          started <= 1'b1;
          if (host_out_fire && out_cnt + 32'd1 == OUT_LINES) begin
            state        <= S_IDLE;
            windows_done <= windows_done + 32'd1;
          end
        end
        S_BYPASS: begin
          if (host_out_fire && out_cnt + 32'd1 == OUT_LINES) begin
            state        <= S_IDLE;
            windows_done <= windows_done + 32'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (state == S_BYPASS) |-> bypass)
    else $error("hbm_channel_ctrl: bypass phase without the switch in bypass");

endmodule
