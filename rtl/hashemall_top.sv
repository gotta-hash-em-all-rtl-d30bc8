// hashemall_top: the three ZK-friendly hash accelerators behind one message
// port, selected by `sel`.
//
//   HASH_RESCUE   one Rescue-Prime pipeline, batch NB, RP_NMUL multipliers
//                 per power map (2: latency-optimised, 6 multipliers)
//   HASH_GRIFFIN  GR_NPIPE Griffin pipelines in parallel, batch GR_NPIPE*NB
//   HASH_RC       RC_NPIPE Reinforced Concrete pipelines, batch RC_NPIPE*NB
// Each hash has its own sponge, whose permutation port drives its pipelines
// in lock step (one start, one done). The defaults are the paper's
// latency-optimised variants: batch 13 for Rescue-Prime, 39 for Griffin and
// 26 for Reinforced Concrete. RP_NMUL = 1, GR_NPIPE = 1, RC_NPIPE = 1 give
// the area-optimised variants (batch 13 each).
// Interface: msg[l][0..1] is block data of lane l (lanes at and above the
// selected hash's batch are ignored); msg_valid/msg_ready is a handshake,
// msg_last marks a message's final block. dig_valid pulses when digest[]
// holds one digest per lane (unused lanes read 0). `sel` may change only
// while busy is low.
// Host I/O is not part of the design: the ports are plain signals.
module hashemall_top
  import hash_pkg::*;
#(
  parameter int unsigned NB       = BATCH,
  parameter int unsigned RP_NMUL  = 2,
  parameter int unsigned GR_NPIPE = 3,
  parameter int unsigned RC_NPIPE = 2,
  localparam int unsigned GR_L    = GR_NPIPE * NB,
  localparam int unsigned RC_L    = RC_NPIPE * NB,
  localparam int unsigned LMAX    = (GR_L > RC_L) ? ((GR_L > NB) ? GR_L : NB)
                                                  : ((RC_L > NB) ? RC_L : NB)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  hash_sel_t sel,
  input  logic      msg_valid,
  output logic      msg_ready,
  input  logic      msg_last,
  input  fe_t       msg [LMAX][2],
  output logic      dig_valid,
  output fe_t       digest [LMAX],
  output logic      busy
);
  // ------------------------------------------------------------ Rescue-Prime
  fe_t    rp_msg [NB][2];
  fe_t    rp_dig [NB];
  state_t rp_px  [NB];
  state_t rp_py  [NB];
  logic   rp_ready, rp_dv, rp_busy, rp_pstart, rp_pdone, rp_cbusy;

  for (genvar i = 0; i < NB; i++) begin : g_rp_msg
    assign rp_msg[i] = msg[i];
  end

  sponge #(.LANES(NB)) u_rp_sponge (
    .clk, .rst_n, .msg_valid(msg_valid && sel == HASH_RESCUE), .msg_ready(rp_ready),
    .msg_last, .msg(rp_msg), .dig_valid(rp_dv), .digest(rp_dig), .busy_o(rp_busy),
    .perm_start(rp_pstart), .perm_x(rp_px), .perm_done(rp_pdone), .perm_y(rp_py));

  rescue_prime_perm #(.NB(NB), .NMUL(RP_NMUL)) u_rp (
    .clk, .rst_n, .start(rp_pstart), .x_i(rp_px), .y_o(rp_py), .done_o(rp_pdone),
    .busy_o(rp_cbusy));

  // ------------------------------------------------------------------ Griffin
  fe_t    gr_msg [GR_L][2];
  fe_t    gr_dig [GR_L];
  state_t gr_px  [GR_L];
  state_t gr_py  [GR_L];
  logic   gr_ready, gr_dv, gr_busy, gr_pstart;
  logic   gr_pdone [GR_NPIPE];
  logic   gr_cbusy [GR_NPIPE];

  for (genvar i = 0; i < GR_L; i++) begin : g_gr_msg
    assign gr_msg[i] = msg[i];
  end

  sponge #(.LANES(GR_L)) u_gr_sponge (
    .clk, .rst_n, .msg_valid(msg_valid && sel == HASH_GRIFFIN), .msg_ready(gr_ready),
    .msg_last, .msg(gr_msg), .dig_valid(gr_dv), .digest(gr_dig), .busy_o(gr_busy),
    .perm_start(gr_pstart), .perm_x(gr_px), .perm_done(gr_pdone[0]), .perm_y(gr_py));

  for (genvar p = 0; p < GR_NPIPE; p++) begin : g_gr
    state_t px [NB];
    state_t py [NB];
    for (genvar i = 0; i < NB; i++) begin : g_el
      assign px[i]          = gr_px[p*NB + i];
      assign gr_py[p*NB + i] = py[i];
    end
    griffin_perm #(.NB(NB)) u_gr (
      .clk, .rst_n, .start(gr_pstart), .x_i(px), .y_o(py), .done_o(gr_pdone[p]),
      .busy_o(gr_cbusy[p]));
  end

  // ------------------------------------------------------- Reinforced Concrete
  fe_t    rc_msg [RC_L][2];
  fe_t    rc_dig [RC_L];
  state_t rc_px  [RC_L];
  state_t rc_py  [RC_L];
  logic   rc_ready, rc_dv, rc_busy, rc_pstart;
  logic   rc_pdone [RC_NPIPE];
  logic   rc_cbusy [RC_NPIPE];

  for (genvar i = 0; i < RC_L; i++) begin : g_rc_msg
    assign rc_msg[i] = msg[i];
  end

  sponge #(.LANES(RC_L)) u_rc_sponge (
    .clk, .rst_n, .msg_valid(msg_valid && sel == HASH_RC), .msg_ready(rc_ready),
    .msg_last, .msg(rc_msg), .dig_valid(rc_dv), .digest(rc_dig), .busy_o(rc_busy),
    .perm_start(rc_pstart), .perm_x(rc_px), .perm_done(rc_pdone[0]), .perm_y(rc_py));

  for (genvar p = 0; p < RC_NPIPE; p++) begin : g_rc
    state_t px [NB];
    state_t py [NB];
    for (genvar i = 0; i < NB; i++) begin : g_el
      assign px[i]           = rc_px[p*NB + i];
      assign rc_py[p*NB + i] = py[i];
    end
    rc_perm #(.NB(NB)) u_rc (
      .clk, .rst_n, .start(rc_pstart), .x_i(px), .y_o(py), .done_o(rc_pdone[p]),
      .busy_o(rc_cbusy[p]));
  end

  // --------------------------------------------------------------- output mux
  always_comb begin
    for (int i = 0; i < LMAX; i++) digest[i] = '0;
    case (sel)
      HASH_RESCUE: begin
        msg_ready = rp_ready;
        dig_valid = rp_dv;
        for (int i = 0; i < NB; i++) digest[i] = rp_dig[i];
      end
      HASH_GRIFFIN: begin
        msg_ready = gr_ready;
        dig_valid = gr_dv;
        for (int i = 0; i < GR_L; i++) digest[i] = gr_dig[i];
      end
      default: begin
        msg_ready = rc_ready;
        dig_valid = rc_dv;
        for (int i = 0; i < RC_L; i++) digest[i] = rc_dig[i];
      end
    endcase
  end

  assign busy = rp_busy || gr_busy || rc_busy;

  // parallel pipelines of one hash run in lock step
  for (genvar p = 1; p < GR_NPIPE; p++) begin : g_gr_chk
    a_gr_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      gr_pdone[p] == gr_pdone[0] && gr_cbusy[p] == gr_cbusy[0])
      else $error("hashemall_top: Griffin pipelines out of step");
  end
  for (genvar p = 1; p < RC_NPIPE; p++) begin : g_rc_chk
    a_rc_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      rc_pdone[p] == rc_pdone[0] && rc_cbusy[p] == rc_cbusy[0])
      else $error("hashemall_top: RC pipelines out of step");
  end
  // a permutation is only started when the engine is idle
  a_rp_idle: assert property (@(posedge clk) disable iff (!rst_n) rp_pstart |-> !rp_cbusy)
    else $error("hashemall_top: Rescue-Prime started while busy");

  // the hash selection must not change while a hash is in progress
  hash_sel_t sel_q;
  always_ff @(posedge clk) sel_q <= sel;
  a_sel_stable: assert property (@(posedge clk) disable iff (!rst_n) busy |-> sel == sel_q)
    else $error("hashemall_top: sel changed while busy");
endmodule
