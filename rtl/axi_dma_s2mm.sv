// axi_dma_s2mm: stream-to-memory DMA engine with an AXI4 write master.
//
// A start pulse begins one single-pass transfer of len_bytes bytes to the
// memory address dst_addr. The length is cut to the DMA_MAX bytes (512 kB)
// that one pass may move, and rounded down to whole beats; xfer_beats shows
// the result combinationally so the data source can be told how much to
// send. The engine then issues INCR bursts of up to BURST_LEN beats, never
// crossing a 4 kB boundary, one burst at a time: address phase, data phase
// (wvalid follows the stream's tvalid, the stream's tready follows wready),
// then the write response. busy is high during the transfer; done is set at
// its end and stays set until the next start; error is set if any response
// was not OKAY.
//
// Timing: at least one clock per address, data beat and response. The
// stream's tlast is not needed, since the length is set by len_bytes.
//
// The paper gives the function (AXI4 DMA into ARM memory, single-pass
// transfer limited to 512 kB). The burst length, one outstanding burst and
// the plain start/busy/done control in place of a register interface are
// this design's own choices. dst_addr is expected to be beat-aligned; its
// low bits are ignored.
module axi_dma_s2mm
  import ufa_pkg::*;
#(
  parameter int unsigned ADDR_W    = AXI_ADDR_W,
  parameter int unsigned DATA_W    = AXI_DATA_W,
  parameter int unsigned DMA_MAX   = DMA_MAX_BYTES,
  parameter int unsigned BURST     = AXI_BURST_LEN,
  parameter int unsigned BEATS_W   = $clog2(DMA_MAX / (DATA_W / 8)) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control
  input  logic                 start,
  input  logic [ADDR_W-1:0]    dst_addr,
  input  logic [31:0]          len_bytes,
  output logic [BEATS_W-1:0]   xfer_beats,
  output logic                 busy,
  output logic                 done,
  output logic                 error,
  // AXI4-Stream slave
  input  logic                 s_axis_tvalid,
  output logic                 s_axis_tready,
  input  logic [DATA_W-1:0]    s_axis_tdata,
  input  logic                 s_axis_tlast,
  // AXI4 write master
  output logic [ADDR_W-1:0]    m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic [2:0]           m_axi_awsize,
  output logic [1:0]           m_axi_awburst,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [DATA_W-1:0]    m_axi_wdata,
  output logic [DATA_W/8-1:0]  m_axi_wstrb,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic [1:0]           m_axi_bresp,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready
);

  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned LSB   = $clog2(BYTES);
  localparam int unsigned PAGE_BEATS = 4096 / BYTES;

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_e;
  state_e state;

  logic [BEATS_W-1:0] beats_left;
  logic [8:0]         burst_beats;   // beats in the current burst
  logic [8:0]         beat_cnt;      // beats sent in the current burst
  logic [8:0]         next_burst;
  logic [12:0]        to_page;       // beats left before the 4 kB boundary
  logic [31:0]        len_clip;

  always_comb begin
    len_clip   = (len_bytes > 32'(DMA_MAX)) ? 32'(DMA_MAX) : len_bytes;
    xfer_beats = BEATS_W'(len_clip >> LSB);
  end

  always_comb begin
    to_page    = 13'(PAGE_BEATS) - 13'(m_axi_awaddr[11:LSB]);
    next_burst = 9'(BURST);
    if (beats_left < BEATS_W'(next_burst)) next_burst = 9'(beats_left);
    if (to_page < 13'(next_burst))         next_burst = 9'(to_page);
  end

  assign busy          = (state != S_IDLE);
  assign m_axi_awsize  = 3'(LSB);
  assign m_axi_awburst = BURST_INCR;
  assign m_axi_awvalid = (state == S_ADDR) && (burst_beats != 9'(0));
  assign m_axi_awlen   = 8'(burst_beats - 1'b1);
  assign m_axi_wdata   = s_axis_tdata;
  assign m_axi_wstrb   = '1;
  assign m_axi_wvalid  = (state == S_DATA) && s_axis_tvalid;
  assign m_axi_wlast   = (beat_cnt == burst_beats - 1'b1);
  assign s_axis_tready = (state == S_DATA) && m_axi_wready;
  assign m_axi_bready  = (state == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      beats_left   <= '0;
      burst_beats  <= '0;
      beat_cnt     <= '0;
      m_axi_awaddr <= '0;
      done         <= 1'b0;
      error        <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start) begin
            m_axi_awaddr <= {dst_addr[ADDR_W-1:LSB], LSB'(0)};
            beats_left   <= xfer_beats;
            done         <= (xfer_beats == '0);
            error        <= 1'b0;
            state        <= (xfer_beats == '0) ? S_IDLE : S_ADDR;
            burst_beats  <= '0;
          end
        end
        S_ADDR: begin
          // burst_beats is loaded on entry to S_ADDR (below) and held
          // stable while awvalid waits for awready.
          if (burst_beats == '0) begin
            burst_beats <= next_burst;
          end else if (m_axi_awready) begin
            beat_cnt <= '0;
            state    <= S_DATA;
          end
        end
        S_DATA: begin
          if (m_axi_wvalid && m_axi_wready) begin
            beat_cnt <= beat_cnt + 1'b1;
            if (m_axi_wlast) state <= S_RESP;
          end
        end
        S_RESP: begin
          if (m_axi_bvalid) begin
            if (m_axi_bresp != RESP_OKAY) error <= 1'b1;
            m_axi_awaddr <= m_axi_awaddr + (ADDR_W'(burst_beats) << LSB);
            beats_left   <= beats_left - BEATS_W'(burst_beats);
            burst_beats  <= '0;
            if (beats_left == BEATS_W'(burst_beats)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ADDR;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
