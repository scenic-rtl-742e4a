// cc_dcqcn: DCQCN rate-based congestion control (congestion-control region #1).
//
// Per queue pair the block keeps the DCQCN state: current rate Rc, target
// rate Rt, congestion estimate alpha, the increase stage and whether a
// congestion notification arrived in the current period. Rates are fractions
// of line rate in units of 1/65536 (65535 = full 200G), alpha is a fraction in
// units of 1/1024.
//   ECN mark / CNP for QP q:  Rt = Rc; Rc = Rc * (1 - alpha/2);
//                             alpha = (1-g) alpha + g; stage = 0.
//   every PERIOD cycles, for every QP (swept one QP per cycle):
//     alpha = (1-g) alpha           if no CNP arrived in the period;
//     stage <  F:     Rc = (Rt + Rc)/2                      (fast recovery)
//     stage < 2F:     Rt += R_AI;  Rc = (Rt + Rc)/2         (additive increase)
//     otherwise:      Rt += R_HAI; Rc = (Rt + Rc)/2         (hyper increase)
// This is the published DCQCN algorithm (Zhu et al., SIGCOMM 2015); the
// paper states only that a full DCQCN implementation is provided, so the
// constants (g = 1/256, F = 5, 55 us period, R_AI ~ 40 Mbit/s, R_HAI ~
// 400 Mbit/s at 200G) are the published defaults, not numbers from the paper.
// The byte-counter trigger of DCQCN is left out: increases are timer driven.
//
// Pacing: a command of QP q passes when the current time has reached
// next_allowed[q]; the QP is then charged gap = ceil(len/64) * 65536 / Rc
// cycles (the time its bytes take at rate Rc on a 64-byte-per-cycle bus),
// computed by a 48-cycle serial divider. One command is accepted per
// division, i.e. at most one command every 50 cycles, inside the paper's
// per-packet budget of ~65 cycles at 391 MHz. A command that must wait
// stalls the command stream (head-of-line, this design's choice).
module cc_dcqcn
  import scenic_pkg::*;
#(
  parameter int N_QP   = 256,
  parameter int PERIOD = 21505,   // 55 us at 391 MHz
  parameter int F      = 5,
  parameter int G_SH   = 8,       // g = 2^-G_SH
  parameter int R_AI   = 13,      // ~40 Mbit/s in 1/65536 of 200G
  parameter int R_HAI  = 131,     // ~400 Mbit/s
  parameter int R_MIN  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  rdma_cmd_t   cmd_in,
  input  logic        cmd_in_valid,
  output logic        cmd_in_ready,
  output rdma_cmd_t   cmd_out,
  output logic        cmd_out_valid,
  input  logic        cmd_out_ready,
  input  cc_signal_t  sig,
  input  logic        sig_valid,
  // observation of one QP's state (statistics / test)
  input  logic [$clog2(N_QP)-1:0] obs_qpn,
  output logic [15:0] obs_rc,
  output logic [15:0] obs_rt,
  output logic [10:0] obs_alpha,
  output logic [31:0] cnp_count
);
  localparam int QW = $clog2(N_QP);

  // Per-QP state lives in memories; one valid bit per QP (reset clears only
  // these) selects the reset state for QPs not written since reset.
  typedef struct packed {
    logic [15:0] rc;
    logic [15:0] rt;
    logic [10:0] alpha;
    logic [3:0]  stage;
    logic        cnp_seen;
  } qp_state_t;
  localparam qp_state_t QP_INIT = '{rc: 16'hFFFF, rt: 16'hFFFF, alpha: 11'd1024, stage: 4'd0, cnp_seen: 1'b0};

  qp_state_t       st_mem [N_QP];
  logic [N_QP-1:0] st_live;
  logic [31:0]     na_mem [N_QP];     // next_allowed time of each QP
  logic [N_QP-1:0] na_live;

  function automatic qp_state_t st_rd(input logic [QW-1:0] i);
    return st_live[i] ? st_mem[i] : QP_INIT;
  endfunction

  logic [31:0] now;
  logic [31:0] period_cnt;
  logic        sweeping;
  logic [QW-1:0] sweep_q;

  qp_state_t obs_s;
  assign obs_s     = st_rd(obs_qpn);
  assign obs_rc    = obs_s.rc;
  assign obs_rt    = obs_s.rt;
  assign obs_alpha = obs_s.alpha;

  // ---------------- pacing / command path ----------------
  typedef enum logic {P_IDLE, P_DIV} pstate_e;
  pstate_e     pstate;
  logic [QW-1:0] div_q;
  logic [47:0] dividend;   // remaining dividend bits (shifted out MSB first)
  logic [16:0] rem;
  logic [47:0] quot;
  logic [15:0] divisor;
  logic [5:0]  div_cnt;
  logic [31:0] t_send;     // time the command being charged was sent

  wire [QW-1:0] cq      = QW'(cmd_in.qpn);
  wire [31:0]   na_cq   = na_live[cq] ? na_mem[cq] : 32'd0;
  wire          allowed = $signed(now - na_cq) >= 0;

  assign cmd_out       = cmd_in;
  assign cmd_out_valid = (pstate == P_IDLE) && cmd_in_valid && allowed;
  assign cmd_in_ready  = (pstate == P_IDLE) && cmd_out_ready && allowed;
  wire   send          = cmd_in_valid && cmd_in_ready;
  wire [31:0] beats    = (cmd_in.len + 32'd63) >> 6;

  // one step of restoring division
  wire [16:0] rem_sh  = {rem[15:0], dividend[47]};
  wire        sub_ok  = rem_sh >= {1'b0, divisor};

  // ---------------- congestion state updates ----------------
  wire          cnp  = sig_valid && sig.ecn;
  wire [QW-1:0] sq   = QW'(sig.qpn);

  function automatic logic [15:0] avg(input logic [15:0] a, input logic [15:0] b);
    return 16'(({1'b0, a} + {1'b0, b}) >> 1);
  endfunction
  function automatic logic [15:0] sat_add(input logic [15:0] a, input int unsigned b);
    logic [16:0] s;
    s = {1'b0, a} + 17'(b);
    return s[16] ? 16'hFFFF : s[15:0];
  endfunction

  qp_state_t sw_s, sw_n, cn_s, cn_n, cq_s;
  assign sw_s = st_rd(sweep_q);
  assign cn_s = st_rd(sq);
  assign cq_s = st_rd(cq);
  wire sweep_we = sweeping && !(cnp && sq == sweep_q);

  // periodic increase of one QP (fast recovery, additive, hyper increase)
  always_comb begin
    logic [15:0] nrt;
    sw_n = sw_s;
    if (!sw_s.cnp_seen) sw_n.alpha = sw_s.alpha - (sw_s.alpha >> G_SH);
    sw_n.cnp_seen = 1'b0;
    if (sw_s.stage < 4'(F))          nrt = sw_s.rt;
    else if (sw_s.stage < 4'(2 * F)) nrt = sat_add(sw_s.rt, R_AI);
    else                             nrt = sat_add(sw_s.rt, R_HAI);
    sw_n.rt = nrt;
    sw_n.rc = avg(nrt, sw_s.rc);
    if (sw_s.stage != 4'hF) sw_n.stage = sw_s.stage + 1'b1;
  end

  // rate decrease on a congestion notification
  always_comb begin
    logic [26:0] cut;
    logic [15:0] nrc;
    cut = (27'(cn_s.rc) * 27'(cn_s.alpha)) >> 11;
    nrc = cn_s.rc - cut[15:0];
    cn_n.rt       = cn_s.rc;
    cn_n.rc       = (nrc < 16'(R_MIN)) ? 16'(R_MIN) : nrc;
    cn_n.alpha    = cn_s.alpha - (cn_s.alpha >> G_SH) + 11'(1024 >> G_SH);
    cn_n.stage    = '0;
    cn_n.cnp_seen = 1'b1;
  end

  wire div_done = (pstate == P_DIV) && (div_cnt == 6'd47);

  always_ff @(posedge clk) begin
    if (sweep_we) st_mem[sweep_q] <= sw_n;
    if (cnp)      st_mem[sq]      <= cn_n;
    if (div_done) na_mem[div_q]   <= t_send + 32'({quot[46:0], sub_ok});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_live <= '0; na_live <= '0;
      now <= '0; period_cnt <= '0; sweeping <= 1'b0; sweep_q <= '0;
      pstate <= P_IDLE; div_q <= '0; dividend <= '0; rem <= '0; quot <= '0;
      divisor <= 16'hFFFF; div_cnt <= '0; t_send <= '0; cnp_count <= '0;
    end else begin
      now <= now + 1;

      // period timer and sweep over all QPs
      if (period_cnt == 32'(PERIOD - 1)) begin
        period_cnt <= '0;
        sweeping   <= 1'b1;
        sweep_q    <= '0;
      end else begin
        period_cnt <= period_cnt + 1;
      end
      if (sweeping) begin
        if (sweep_q == QW'(N_QP - 1)) sweeping <= 1'b0;
        sweep_q <= sweep_q + 1'b1;
        if (sweep_we) st_live[sweep_q] <= 1'b1;
      end
      if (cnp) begin
        st_live[sq] <= 1'b1;
        cnp_count   <= cnp_count + 1;
      end
      if (div_done) na_live[div_q] <= 1'b1;

      // pacing: compute the gap of the command just sent
      unique case (pstate)
        P_IDLE: if (send) begin
          pstate   <= P_DIV;
          div_q    <= cq;
          dividend <= {beats[31:0], 16'h0};
          rem      <= '0;
          quot     <= '0;
          divisor  <= cq_s.rc;
          div_cnt  <= '0;
          t_send   <= now;
        end
        P_DIV: begin
          rem      <= sub_ok ? (rem_sh - {1'b0, divisor}) : rem_sh;
          quot     <= {quot[46:0], sub_ok};
          dividend <= {dividend[46:0], 1'b0};
          div_cnt  <= div_cnt + 1'b1;
          if (div_done) pstate <= P_IDLE;
        end
        default: pstate <= P_IDLE;
      endcase
    end
  end
endmodule
