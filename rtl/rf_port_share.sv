// rf_port_share: one register-file read port and one write port shared by a
// Tensor Core (TC) and an FHECore unit (FC).
//
// FHECore does not get register-file ports of its own: it uses the ones the
// Tensor Core already has, through a multiplexer in front of the two units.
// Because the ports are shared the two units cannot move operands at the same
// time; one waits while the other holds the port. This block is that
// multiplexer.
//
// Read side: a burst from the register file carries a destination tag
// (rf_rd_dst, sampled on the first beat). The burst is routed to that unit
// and the port stays locked to it until the beat with last = 1 has been
// accepted; the register file sees the ready of the unit it is feeding.
// The read beat itself is broadcast to both units; only valid and ready are
// steered, so the beat outputs are plain wires from rf_rd_beat.
// Write side: both units may offer result bursts. A free port is granted to
// the requester, alternating TC/FC when both ask in the same cycle, and is
// held until that burst's last beat has been written. The unit that is kept
// waiting sees ready low, and wr_stall flags those cycles.
// rf_wr_src names the unit whose beat is on the write port.
//
// From the paper: a shared read and write port and the mux between the
// register file and TC/FC. This design's own: valid/ready beats, the burst
// tag, burst locking and the alternating write grant.
module rf_port_share
  import fhecore_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // register-file read port
  input  logic  rf_rd_valid,
  output logic  rf_rd_ready,
  input  beat_t rf_rd_beat,
  input  dst_e  rf_rd_dst,
  // register-file write port
  output logic  rf_wr_valid,
  input  logic  rf_wr_ready,
  output beat_t rf_wr_beat,
  output dst_e  rf_wr_src,
  // Tensor Core side
  output logic  tc_rd_valid,
  input  logic  tc_rd_ready,
  output beat_t tc_rd_beat,
  input  logic  tc_wr_valid,
  output logic  tc_wr_ready,
  input  beat_t tc_wr_beat,
  // FHECore side
  output logic  fc_rd_valid,
  input  logic  fc_rd_ready,
  output beat_t fc_rd_beat,
  input  logic  fc_wr_valid,
  output logic  fc_wr_ready,
  input  beat_t fc_wr_beat,
  // a write burst is waiting because the other unit holds the port
  output logic  wr_stall
);

  // ------------------------------------------------------------ read demux
  logic rd_lock;
  dst_e rd_owner;
  dst_e rd_sel;

  assign rd_sel      = rd_lock ? rd_owner : rf_rd_dst;
  assign tc_rd_valid = rf_rd_valid && (rd_sel == DST_TC);
  assign fc_rd_valid = rf_rd_valid && (rd_sel == DST_FC);
  assign tc_rd_beat  = rf_rd_beat;
  assign fc_rd_beat  = rf_rd_beat;
  assign rf_rd_ready = (rd_sel == DST_TC) ? tc_rd_ready : fc_rd_ready;

  wire rd_fire = rf_rd_valid && rf_rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_lock  <= 1'b0;
      rd_owner <= DST_TC;
    end else if (rd_fire) begin
      rd_lock  <= !rf_rd_beat.last;
      rd_owner <= rd_sel;
    end
  end

  // ---------------------------------------------------------- write arbiter
  logic wr_lock;
  dst_e wr_owner;
  dst_e last_grant;
  dst_e wr_sel;
  logic wr_any;

  always_comb begin
    wr_any = tc_wr_valid || fc_wr_valid;
    if (wr_lock)                         wr_sel = wr_owner;
    else if (tc_wr_valid && fc_wr_valid) wr_sel = (last_grant == DST_TC) ? DST_FC : DST_TC;
    else if (fc_wr_valid)                wr_sel = DST_FC;
    else                                 wr_sel = DST_TC;
  end

  assign rf_wr_src   = wr_sel;
  assign rf_wr_valid = (wr_sel == DST_TC) ? tc_wr_valid : fc_wr_valid;
  assign rf_wr_beat  = (wr_sel == DST_TC) ? tc_wr_beat  : fc_wr_beat;
  assign tc_wr_ready = rf_wr_ready && (wr_sel == DST_TC);
  assign fc_wr_ready = rf_wr_ready && (wr_sel == DST_FC);
  assign wr_stall    = (tc_wr_valid && wr_sel != DST_TC) || (fc_wr_valid && wr_sel != DST_FC);

  wire wr_fire = rf_wr_valid && rf_wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_lock    <= 1'b0;
      wr_owner   <= DST_TC;
      last_grant <= DST_FC;
    end else if (wr_fire) begin
      wr_lock  <= !rf_wr_beat.last;
      wr_owner <= wr_sel;
      if (!wr_lock) last_grant <= wr_sel;
    end
  end

  // --------------------------------------------------------------- checks
  // A unit never sees a write grant while the other owns the port.
  a_wr_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(tc_wr_ready && fc_wr_ready));
  // The register file holds a read beat until it is taken.
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rf_rd_valid && !rf_rd_ready |=> rf_rd_valid && $stable(rf_rd_beat));
  // Nothing is offered to the write port without a requester.
  a_wr_valid: assert property (@(posedge clk) disable iff (!rst_n)
    rf_wr_valid |-> wr_any);

endmodule
