// fhecore_sm: the FHECore additions to one streaming multiprocessor (SM).
//
// An SM gets as many FHECore units as it has Tensor Cores (NUM_UNITS = 4 for
// an A100 SM). Unit i shares the register-file read and write port of Tensor
// Core i through an rf_port_share multiplexer, so the SM's warp dispatch
// keeps the Tensor Core issue pattern and the register file keeps its ports.
// The register file, the Tensor Cores and the warp scheduler are existing
// GPU blocks and stay outside: their side of each shared port is a port of
// this module.
//
// Per unit i:
//   rf_rd_*[i]  read port from the register file; rf_rd_dst[i] says whether
//               the burst feeds Tensor Core i or FHECore unit i
//   rf_wr_*[i]  write port into the register file; rf_wr_src[i] says whose
//               result is on it
//   tc_*[i]     Tensor Core i's side of the shared port
//   fc_busy[i], fc_done[i], wr_stall[i]  status of unit i and its port
// Timing is that of fhecore_unit (17 read beats, 44 compute cycles, 4 write
// beats per FHEC.16816) plus no added latency in the port multiplexer,
// which is combinational.
module fhecore_sm
  import fhecore_pkg::*;
#(
  parameter int unsigned NUM_UNITS = NUM_FC
) (
  input  logic  clk,
  input  logic  rst_n,
  // register-file side
  input  logic  rf_rd_valid [NUM_UNITS],
  output logic  rf_rd_ready [NUM_UNITS],
  input  beat_t rf_rd_beat  [NUM_UNITS],
  input  dst_e  rf_rd_dst   [NUM_UNITS],
  output logic  rf_wr_valid [NUM_UNITS],
  input  logic  rf_wr_ready [NUM_UNITS],
  output beat_t rf_wr_beat  [NUM_UNITS],
  output dst_e  rf_wr_src   [NUM_UNITS],
  // Tensor Core side
  output logic  tc_rd_valid [NUM_UNITS],
  input  logic  tc_rd_ready [NUM_UNITS],
  output beat_t tc_rd_beat  [NUM_UNITS],
  input  logic  tc_wr_valid [NUM_UNITS],
  output logic  tc_wr_ready [NUM_UNITS],
  input  beat_t tc_wr_beat  [NUM_UNITS],
  // status
  output logic  fc_busy     [NUM_UNITS],
  output logic  fc_done     [NUM_UNITS],
  output logic  wr_stall    [NUM_UNITS]
);

  for (genvar i = 0; i < NUM_UNITS; i++) begin : g_unit
    logic  fc_rd_valid, fc_rd_ready;
    beat_t fc_rd_beat;
    logic  fc_wr_valid, fc_wr_ready;
    beat_t fc_wr_beat;

    rf_port_share u_port (
      .clk         (clk),
      .rst_n       (rst_n),
      .rf_rd_valid (rf_rd_valid[i]),
      .rf_rd_ready (rf_rd_ready[i]),
      .rf_rd_beat  (rf_rd_beat[i]),
      .rf_rd_dst   (rf_rd_dst[i]),
      .rf_wr_valid (rf_wr_valid[i]),
      .rf_wr_ready (rf_wr_ready[i]),
      .rf_wr_beat  (rf_wr_beat[i]),
      .rf_wr_src   (rf_wr_src[i]),
      .tc_rd_valid (tc_rd_valid[i]),
      .tc_rd_ready (tc_rd_ready[i]),
      .tc_rd_beat  (tc_rd_beat[i]),
      .tc_wr_valid (tc_wr_valid[i]),
      .tc_wr_ready (tc_wr_ready[i]),
      .tc_wr_beat  (tc_wr_beat[i]),
      .fc_rd_valid (fc_rd_valid),
      .fc_rd_ready (fc_rd_ready),
      .fc_rd_beat  (fc_rd_beat),
      .fc_wr_valid (fc_wr_valid),
      .fc_wr_ready (fc_wr_ready),
      .fc_wr_beat  (fc_wr_beat),
      .wr_stall    (wr_stall[i])
    );

    fhecore_unit u_fc (
      .clk      (clk),
      .rst_n    (rst_n),
      .rd_valid (fc_rd_valid),
      .rd_ready (fc_rd_ready),
      .rd_beat  (fc_rd_beat),
      .wr_valid (fc_wr_valid),
      .wr_ready (fc_wr_ready),
      .wr_beat  (fc_wr_beat),
      .busy     (fc_busy[i]),
      .mmm_done (fc_done[i])
    );
  end

endmodule
