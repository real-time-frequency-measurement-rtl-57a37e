// freq_meas_top: one signal processing module of the real-time frequency
// measurement system, with its real-time transfer path.
//
// Frequency path: the 40-lane, 12-bit sample bus and the pulse trigger enter
// the two-stage parallel-to-serial converter, which hands each 440-sample
// frame to one of 24 spectrum units in turn. Each unit zero-pads to 512,
// runs a 512-point FFT, takes magnitudes and finds the peak bin and its two
// neighbours. The results are put back in frame order and the shared
// parabolic fitting module turns each into a frequency (S16,4). Time path: the
// same bus, gated by `capture`, is serialised, decimated and cached. The path
// multiplexer (mode_sel) picks one of them for the real-time transfer, which
// caches in a FIFO and the external DDR and streams frames toward the PCIE
// interface. Everything except the write side of the time path's
// asynchronous FIFO runs on clk (250 MHz in the source); in this top the
// receiver is assumed to deliver the bus on clk as well, and rx_clk is only
// the time path's write clock.
// Outside this design, with their user-side signals as ports: the sample
// receiver (adc_*), the trigger source of the time path (capture), the DDR
// memory controller (mem_*), the PCIE interface (pcie_*) and the host
// (start_measure, read_done, mode_sel, decim).
// At the defaults one frame per 512/24 = 21.3 clocks is sustained; a frame's
// frequency leaves about 1.6k clocks after its trigger.
module freq_meas_top
  import fm_pkg::*;
#(
  parameter int unsigned     LANES        = IN_LANES,
  parameter int unsigned     GROUPS       = N_GROUPS,
  parameter int unsigned     SUBS         = N_SUB,
  parameter int unsigned     FRAME        = FRAME_PTS,
  parameter int unsigned     N            = FFT_N,
  parameter int unsigned     BIN_MULT     = 10,
  parameter int unsigned     BLOCK_PTS    = 81920,
  parameter int unsigned     FRAME_BLOCKS = 20,
  parameter int unsigned     XFIFO_DEPTH  = 65536,
  parameter int unsigned     DDR_AW       = 25,
  parameter longint unsigned DDR_DEPTH    = 64'd1 << 25
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // sample bus and trigger
  input  logic                      adc_valid,
  input  logic [LANES*ADC_W-1:0]    adc_data,
  input  logic                      trigger,
  // time path
  input  logic                      rx_clk,
  input  logic                      rx_rst_n,
  input  logic                      capture,
  input  logic [15:0]               decim,
  // host control
  input  logic                      mode_sel,      // 0 frequency, 1 oscilloscope
  input  logic                      start_measure,
  input  logic                      read_done,
  // DDR memory controller, user side
  output logic                      mem_wr_en,
  output logic [DDR_AW-1:0]         mem_wr_addr,
  output logic [479:0]              mem_wr_data,
  output logic                      mem_rd_en,
  output logic [DDR_AW-1:0]         mem_rd_addr,
  input  logic                      mem_rdy,
  input  logic                      mem_rd_valid,
  input  logic [479:0]              mem_rd_data,
  // stream toward the PCIE interface
  output logic                      pcie_valid,
  output logic [31:0]               pcie_data,
  input  logic                      pcie_ready,
  // results and status
  output logic                      freq_valid,
  output logic signed [FREQ_W-1:0]  freq,
  output logic [31:0]               frames_captured,
  output logic [15:0]               missed_triggers,
  output logic [31:0]               blocks_moved,
  output logic [31:0]               frames_sent,
  output logic [31:0]               catchup_waits,
  output logic [4:0]                overflow       // {ddr, xfer fifo, time path, reorg, p2s}
);
  localparam int unsigned NL = GROUPS * SUBS;

  logic [NL-1:0]             s_valid, s_first, s_ready;
  logic [NL-1:0][ADC_W-1:0]  s_data;
  logic [NL-1:0]             pk_valid;
  peak_t [NL-1:0]            pk;
  logic                      r_valid;
  peak_t                     r_peak;
  logic signed [IDX_W+12:0]  xc;
  logic                      t_valid, t_ready;
  logic [15:0]               t_data;
  logic                      m_valid;
  logic [15:0]               m_data;

  p2s_two_stage #(
    .LANES(LANES), .MID_L(MID_LANES), .GROUPS(GROUPS), .SUBS(SUBS), .FRAME(FRAME)
  ) u_p2s (
    .clk, .rst_n, .in_valid(adc_valid), .in_data(adc_data), .trigger,
    .out_valid(s_valid), .out_first(s_first), .out_data(s_data), .out_ready(s_ready),
    .frames(frames_captured), .missed_triggers, .overflow(overflow[0])
  );

  pipeline_fft #(.LANES(NL), .N(N), .FRAME(FRAME)) u_fft (
    .clk, .rst_n, .in_valid(s_valid), .in_data(s_data), .in_ready(s_ready),
    .out_valid(pk_valid), .out_peak(pk)
  );

  result_reorg #(.LANES(NL)) u_reorg (
    .clk, .rst_n, .in_valid(pk_valid), .in_peak(pk),
    .out_valid(r_valid), .out_peak(r_peak), .overflow(overflow[1])
  );

  parabola_fit #(.F(12), .BIN_MULT(BIN_MULT)) u_fit (
    .clk, .rst_n, .in_valid(r_valid), .in_peak(r_peak),
    .out_valid(freq_valid), .out_freq(freq), .out_xc(xc)
  );

  time_domain_path #(.LANES(LANES)) u_time (
    .rx_clk, .rx_rst_n, .in_valid(adc_valid), .in_data(adc_data), .capture,
    .clk, .rst_n, .decim,
    .out_valid(t_valid), .out_data(t_data), .out_ready(t_ready), .overflow(overflow[2])
  );

  path_mux u_mux (
    .clk, .rst_n, .sel(mode_sel),
    .freq_valid, .freq_data(freq),
    .time_valid(t_valid), .time_data(t_data), .time_ready(t_ready),
    .out_valid(m_valid), .out_data(m_data)
  );

  realtime_transfer #(
    .BLOCK_PTS(BLOCK_PTS), .FRAME_BLOCKS(FRAME_BLOCKS), .FIFO_DEPTH(XFIFO_DEPTH),
    .DDR_AW(DDR_AW), .DDR_DEPTH(DDR_DEPTH), .OUT_B(4)
  ) u_xfer (
    .clk, .rst_n, .in_valid(m_valid), .in_data(m_data),
    .start_measure, .read_done,
    .mem_wr_en, .mem_wr_addr, .mem_wr_data, .mem_rd_en, .mem_rd_addr, .mem_rdy,
    .mem_rd_valid, .mem_rd_data,
    .out_valid(pcie_valid), .out_data(pcie_data), .out_ready(pcie_ready),
    .blocks(blocks_moved), .frames(frames_sent), .catchup_waits,
    .fifo_overflow(overflow[3]), .ddr_overflow(overflow[4])
  );
endmodule
