// sldu_ring: ring extension of a cluster's slide unit.
//
// Each cluster holds elements i with (i / L) mod C = c; in "group" g the
// cluster holds elements i0 .. i0+L-1, i0 = g*L*C + c*L, one per lane.  The
// unit executes the cross-cluster part of three operations on 64-bit
// elements, one group per step:
//   slide1down: dst[i] = src[i+1] (dst[vl-1] = scalar).  The cluster sends
//     its lane-0 element to the previous cluster and fills lane L-1 with the
//     element received from the next cluster (cluster C-1 receives from
//     cluster 0's following group over the ring wrap-around);
//   slide1up: dst[i] = src[i-1] (dst[0] = scalar), mirrored: lane L-1 goes
//     to the next cluster, lane 0 comes from the previous one;
//   reduce: the inter-cluster stage of a reduction.  Each cluster brings
//     one partial result (after the intra- and inter-lane stages, which stay
//     inside the cluster).  In step s a cluster whose index has bit s set
//     (and no lower bit) sends its partial 2^s hops down the ring; the
//     cluster 2^s below combines it.  After log2(C) steps cluster 0 holds
//     the result.  Later steps use multi-hop packets that the intermediate
//     ring nodes bypass.
// The shift by one lane inside the cluster is the local slide; it is
// modelled here so that the unit can be checked end to end.
//
// Interface: cmd (op, vl, scalar, reduction operator) starts an operation;
// grp_i delivers the cluster's source groups in order and grp_o returns the
// slid groups with a mask of lanes that hold an element below vl; red_i
// takes the cluster's partial and red_o returns the final value (cluster 0
// only).  done_o pulses when the cluster has finished its part.  A new ring
// operation must not start before every cluster finished the previous one
// (the clusters execute in lock-step, so this holds).
// Timing: a group needs one ring round trip when it waits for a neighbour
// (1 + cuts cycles per hop); a reduction takes log2(C) dependent steps.
// Integer reduction operators stand in for the lanes' floating-point units.
module sldu_ring
  import araxl_pkg::*;
#(
  parameter int unsigned NR_LANES    = araxl_pkg::NrLanes,
  parameter int unsigned NR_CLUSTERS = araxl_pkg::NrClusters
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [7:0]                  cluster_id_i,
  // command
  input  ring_op_e                    op_i,
  input  red_op_e                     red_op_i,
  input  vlen_t                       vl_i,
  input  xlen_t                       scalar_i,
  input  logic                        cmd_valid_i,
  output logic                        cmd_ready_o,
  output logic                        done_o,
  // source / result groups
  input  xlen_t [NR_LANES-1:0]        grp_i,
  input  logic                        grp_valid_i,
  output logic                        grp_ready_o,
  output xlen_t [NR_LANES-1:0]        grp_o,
  output logic  [NR_LANES-1:0]        grp_mask_o,
  output logic                        grp_valid_o,
  input  logic                        grp_ready_i,
  // reduction partial in, result out
  input  xlen_t                       red_i,
  input  logic                        red_valid_i,
  output logic                        red_ready_o,
  output xlen_t                       red_o,
  output logic                        red_valid_o,
  input  logic                        red_ready_i,
  // ring node
  output ring_pkt_t                   tx_up_o,
  output logic                        tx_up_valid_o,
  input  logic                        tx_up_ready_i,
  output ring_pkt_t                   tx_dn_o,
  output logic                        tx_dn_valid_o,
  input  logic                        tx_dn_ready_i,
  input  ring_pkt_t                   rx_up_i,
  input  logic                        rx_up_valid_i,
  output logic                        rx_up_ready_o,
  input  ring_pkt_t                   rx_dn_i,
  input  logic                        rx_dn_valid_i,
  output logic                        rx_dn_ready_o
);

  localparam int unsigned L     = NR_LANES;
  localparam int unsigned C     = NR_CLUSTERS;
  localparam int unsigned Steps = (C > 1) ? $clog2(C) : 1;

  typedef enum logic [2:0] {IDLE, GRP, XCHG, RSTEP, RDONE} state_e;
  state_e state_q;

  ring_op_e op_q;
  red_op_e  rop_q;
  vlen_t    vl_q;
  xlen_t    scalar_q;
  vlen_t    i0_q;                 // index of lane 0 of the current group
  xlen_t [L-1:0] g_q;             // current source group
  logic     need_tx_q, need_rx_q;
  xlen_t    rx_q;

  xlen_t    acc_q;
  logic [3:0] step_q;
  logic     sent_q;
  // reduction packets are kept per step: they may arrive in any order
  xlen_t [Steps-1:0] slot_q;
  logic  [Steps-1:0] slot_v_q;

  xlen_t [L-1:0] o_d_q;
  logic  [L-1:0] o_m_q;
  logic          o_v_q;

  wire [7:0] cid = cluster_id_i;

  function automatic xlen_t red_fn(red_op_e op, xlen_t a, xlen_t b);
    unique case (op)
      RED_SUM:  return a + b;
      RED_AND:  return a & b;
      RED_OR:   return a | b;
      RED_XOR:  return a ^ b;
      RED_MINU: return (a < b) ? a : b;
      RED_MAXU: return (a > b) ? a : b;
      default:  return a + b;
    endcase
  endfunction

  // first group index of this cluster
  wire vlen_t first_i0 = vlen_t'(cid) * vlen_t'(L);

  assign cmd_ready_o = (state_q == IDLE);
  assign grp_ready_o = (state_q == GRP) && (i0_q < vl_q);
  assign red_ready_o = (state_q == IDLE) && cmd_valid_i && (op_i == RING_REDUCE);

  // ---------------------------------------------------------------------
  // Ring injection
  // ---------------------------------------------------------------------
  logic slide_tx;
  assign slide_tx = (state_q == XCHG) && need_tx_q;

  always_comb begin
    tx_up_o       = '0;
    tx_dn_o       = '0;
    tx_up_valid_o = 1'b0;
    tx_dn_valid_o = 1'b0;
    if (slide_tx && op_q == RING_SLIDE1UP) begin
      tx_up_o       = '{data: g_q[L-1], hops: 8'd1, tag: 4'd0};
      tx_up_valid_o = 1'b1;
    end
    if (slide_tx && op_q == RING_SLIDE1DOWN) begin
      tx_dn_o       = '{data: g_q[0], hops: 8'd1, tag: 4'd0};
      tx_dn_valid_o = 1'b1;
    end
    if (state_q == RSTEP && cid[step_q[2:0]] && !sent_q) begin
      tx_dn_o       = '{data: acc_q, hops: 8'(1 << step_q), tag: step_q};
      tx_dn_valid_o = 1'b1;
    end
  end

  // ---------------------------------------------------------------------
  // Ring reception
  // ---------------------------------------------------------------------
  wire slide_rx_up = (state_q == XCHG) && need_rx_q && (op_q == RING_SLIDE1UP);
  wire slide_rx_dn = (state_q == XCHG) && need_rx_q && (op_q == RING_SLIDE1DOWN);
  wire red_mode    = (state_q == RSTEP);
  assign rx_up_ready_o = slide_rx_up;
  assign rx_dn_ready_o = slide_rx_dn ||
                         (red_mode && !slot_v_q[32'(rx_dn_i.tag) % Steps]);

  // ---------------------------------------------------------------------
  // Result group and reduction output
  // ---------------------------------------------------------------------
  assign grp_o       = o_d_q;
  assign grp_mask_o  = o_m_q;
  assign grp_valid_o = o_v_q;
  assign red_o       = acc_q;
  assign red_valid_o = (state_q == RDONE);

  // the slid group, once the neighbour element (rx) is known
  function automatic void slide_group(input ring_op_e op, input xlen_t [L-1:0] src,
                                      input xlen_t nb, input xlen_t sc, input vlen_t i0,
                                      input vlen_t vl, output xlen_t [L-1:0] dst,
                                      output logic [L-1:0] m);
    for (int l = 0; l < L; l++) begin
      vlen_t i;
      i    = i0 + vlen_t'(l);
      m[l] = (i < vl);
      if (op == RING_SLIDE1DOWN) begin
        if (i + 1 >= vl)      dst[l] = sc;
        else if (l < L - 1)   dst[l] = src[l+1];
        else                  dst[l] = nb;
      end else begin
        if (i == 0)           dst[l] = sc;
        else if (l > 0)       dst[l] = src[l-1];
        else                  dst[l] = nb;
      end
    end
  endfunction

  xlen_t [L-1:0] slid;
  logic  [L-1:0] slid_m;
  always_comb begin
    slide_group(op_q, g_q, need_rx_q ? (op_q == RING_SLIDE1UP ? rx_up_i.data : rx_dn_i.data) : rx_q,
                scalar_q, i0_q, vl_q, slid, slid_m);
  end

  wire tx_done = !need_tx_q || (op_q == RING_SLIDE1UP ? tx_up_ready_i : tx_dn_ready_i);
  wire rx_done = !need_rx_q || (op_q == RING_SLIDE1UP ? rx_up_valid_i : rx_dn_valid_i);
  wire can_out = !o_v_q || grp_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      op_q      <= RING_SLIDE1UP;
      rop_q     <= RED_SUM;
      vl_q      <= '0;
      scalar_q  <= '0;
      i0_q      <= '0;
      g_q       <= '0;
      need_tx_q <= 1'b0;
      need_rx_q <= 1'b0;
      rx_q      <= '0;
      acc_q     <= '0;
      step_q    <= '0;
      sent_q    <= 1'b0;
      slot_q    <= '0;
      slot_v_q  <= '0;
      o_d_q     <= '0;
      o_m_q     <= '0;
      o_v_q     <= 1'b0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (grp_ready_i) o_v_q <= 1'b0;
      // reduction packets can arrive before this cluster reaches their step
      if (rx_dn_valid_i && rx_dn_ready_o && red_mode) begin
        slot_q[32'(rx_dn_i.tag) % Steps]   <= rx_dn_i.data;
        slot_v_q[32'(rx_dn_i.tag) % Steps] <= 1'b1;
      end
      unique case (state_q)
        IDLE: if (cmd_valid_i) begin
          op_q     <= op_i;
          rop_q    <= red_op_i;
          vl_q     <= vl_i;
          scalar_q <= scalar_i;
          i0_q     <= first_i0;
          if (op_i == RING_REDUCE) begin
            if (red_valid_i) begin
              acc_q    <= red_i;
              step_q   <= '0;
              sent_q   <= 1'b0;
              slot_v_q <= '0;
              state_q  <= (C > 1) ? RSTEP : RDONE;
            end
          end else begin
            state_q <= GRP;
          end
        end
        GRP: begin
          if (i0_q >= vl_q) begin
            // all groups done once the last result has left
            if (!o_v_q || grp_ready_i) begin
              state_q <= IDLE;
              done_o  <= 1'b1;
            end
          end else if (grp_valid_i) begin
            g_q <= grp_i;
            if (op_q == RING_SLIDE1DOWN) begin
              need_tx_q <= (i0_q != 0);
              need_rx_q <= (i0_q + vlen_t'(L) < vl_q);
            end else begin
              need_tx_q <= (i0_q + vlen_t'(L) < vl_q);
              need_rx_q <= (i0_q != 0);
            end
            state_q <= XCHG;
          end
        end
        XCHG: begin
          if (tx_done) need_tx_q <= 1'b0;
          if (need_rx_q && rx_done) begin
            need_rx_q <= 1'b0;
            rx_q      <= (op_q == RING_SLIDE1UP) ? rx_up_i.data : rx_dn_i.data;
          end
          if (tx_done && rx_done && can_out) begin
            o_d_q   <= slid;
            o_m_q   <= slid_m;
            o_v_q   <= 1'b1;
            i0_q    <= i0_q + vlen_t'(L * C);
            state_q <= GRP;
          end
        end
        RSTEP: begin
          if (cid[step_q[2:0]]) begin
            // sender in this step: pass the partial on and stop
            if (tx_dn_ready_i) begin
              sent_q  <= 1'b1;
              state_q <= IDLE;
              done_o  <= 1'b1;
            end
          end else if (slot_v_q[32'(step_q) % Steps]) begin
            acc_q                  <= red_fn(rop_q, acc_q, slot_q[32'(step_q) % Steps]);
            slot_v_q[32'(step_q) % Steps] <= 1'b0;
            if (32'(step_q) == Steps - 1) state_q <= RDONE;
            else                          step_q  <= step_q + 4'd1;
          end
        end
        RDONE: if (red_ready_i || cid != 8'd0) begin
          state_q <= IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // an odd cluster leaves the reduction tree after step 0
  a_tree: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == RSTEP |-> !cid[0] || step_q == 0) else $error("sldu_ring: odd cluster past step 0");

endmodule
