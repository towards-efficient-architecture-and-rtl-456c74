// fm_sys_ctrl: system controller shared by the two halves.
//
// It holds the pruning threshold th and one importance weight w_l per
// fuseLink (the output vector [w1..wNLINKS] of the hypernetwork for the
// current input). At the start of a frame it compares every w_l with th in
// fp32 and latches keep[l] = (w_l >= th): a link whose weight is below the
// threshold is pruned for this frame. Threshold compare and per-input
// pruning follow the paper; latching the decision once per frame is this
// design's choice.
// It also keeps the two halves aligned: ready[l] is cleared at frame start
// and set when a half reports that it has finished producing link l
// (link_done_* with link_id_*), so the consumer of the link in the other
// half may start. start pulses start_halves for one cycle; done goes high
// when both halves have reported half_done_* and stays high until the next
// start. Register writes (th_we, wl_we) take effect at the next start.
module fm_sys_ctrl
  import fp32_pkg::*;
#(
  parameter int unsigned NLINKS = a3f_pkg::NLINKS_DEF,
  localparam int unsigned LW    = a3f_pkg::LINK_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              th_we,
  input  fp32_t             th_in,
  input  logic              wl_we,
  input  logic [LW-1:0]     wl_idx,
  input  fp32_t             wl_in,
  input  logic              start,
  output logic              start_halves,
  input  logic              link_done_a,
  input  logic [LW-1:0]     link_id_a,
  input  logic              link_done_b,
  input  logic [LW-1:0]     link_id_b,
  input  logic              half_done_a,
  input  logic              half_done_b,
  output logic [NLINKS-1:0] keep,
  output logic [NLINKS-1:0] ready,
  output logic              busy,
  output logic              done
);

  fp32_t th_q;
  fp32_t wl_q [NLINKS];
  logic  da_q, db_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th_q         <= FP_ZERO;
      wl_q         <= '{default: FP_ZERO};
      keep         <= '0;
      ready        <= '0;
      start_halves <= 1'b0;
      busy         <= 1'b0;
      done         <= 1'b0;
      da_q         <= 1'b0;
      db_q         <= 1'b0;
    end else begin
      start_halves <= 1'b0;
      if (th_we) th_q <= th_in;
      if (wl_we && 32'(wl_idx) < NLINKS) wl_q[wl_idx] <= wl_in;
      if (start && !busy) begin
        for (int l = 0; l < int'(NLINKS); l++) keep[l] <= fp_ge(wl_q[l], th_q);
        ready        <= '0;
        start_halves <= 1'b1;
        busy         <= 1'b1;
        done         <= 1'b0;
        da_q         <= 1'b0;
        db_q         <= 1'b0;
      end else if (busy) begin
        if (link_done_a) ready[link_id_a] <= 1'b1;
        if (link_done_b) ready[link_id_b] <= 1'b1;
        if (half_done_a) da_q <= 1'b1;
        if (half_done_b) db_q <= 1'b1;
        if ((da_q || half_done_a) && (db_q || half_done_b) && !start_halves) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
