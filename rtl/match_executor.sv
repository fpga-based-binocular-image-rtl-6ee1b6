// Match executor: NG groups of match cores, each group one trace core (T)
// and one stereo core (S) sharing one current-left feature, run by a four
// state FSM, with the result checks and a Tx FIFO towards the output stream.
//
// After `start`, with n_l features in RL, n_r in RR and n_p in RP:
//   LOAD      reads the next NG features of RL (one per clock, NG+1 clocks)
//             into the groups' A registers; groups beyond n_l stay disabled.
//   RUNNING   reads RR[j] and RP[j] together for j = 0 .. max(n_r, n_p)-1,
//             one address per clock, and presents each returned feature to
//             every S core (RR) and T core (RP) as candidate B. It ends
//             ("running done") when the last candidate has been presented.
//   TRANSPORT goes through the groups one per clock; each enabled group's
//             checked result is pushed into the Tx FIFO when at least one of
//             its matches passed, waiting while the FIFO is full.
//   CLEAR     resets the cores, steps on by NG features, and returns to LOAD,
//             or to IDLE when all of RL has been loaded.
// IDLE stands for the start/end points of the flow chart. Trace matching is
// only done when trace_en (the paper starts it from the second frame).
// Cycle count for one start (busy clocks): ceil(n_l/NG) * (2*NG + max(n_r,n_p) + 6),
// i.e. LOAD NG+2, RUNNING n+2, TRANSPORT NG+1 and CLEAR 1 clock per round,
// when the FIFO never fills. The output is a valid/ready stream
// (AXI-Stream style) of match_result_t from the FIFO head.
//
// The FSM states, the T/S grouping and the checks are the paper's; the
// number of groups (NG, "can be flexibly configured") and FIFO depth are
// this design's choices.
module match_executor
  import feat_pkg::*;
#(
  parameter int unsigned NG       = 8,
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned AW       = $clog2(DEPTH),
  parameter int unsigned FIFO_DEP = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               trace_en,
  output logic               busy,
  // match configuration
  input  logic [HD_BITS-1:0]    hd_thresh,
  input  logic [COORD_BITS-1:0] y_tol,
  input  logic [COORD_BITS-1:0] max_disp,
  // multi buffer read ports
  input  logic [AW:0]        n_l,
  input  logic [AW:0]        n_r,
  input  logic [AW:0]        n_p,
  output logic [AW-1:0]      rl_addr,
  output logic [AW-1:0]      rr_addr,
  output logic [AW-1:0]      rp_addr,
  input  feature_t           rl_data,
  input  feature_t           rr_data,
  input  feature_t           rp_data,
  // result stream
  output logic               m_valid,
  input  logic               m_ready,
  output match_result_t      m_data
);
  typedef enum logic [2:0] {IDLE, LOAD, RUNNING, TRANSPORT, CLEAR} state_t;
  localparam int unsigned GW = $clog2(NG + 1);

  state_t      state;
  logic [AW:0] base;        // index of the first RL feature of this round
  logic [AW:0] j;           // RUNNING read index
  logic [AW:0] n_run;
  logic [GW-1:0] k;         // LOAD / TRANSPORT group index
  logic        tr_en;       // trace enabled for this start
  logic        ld_v;        // a LOAD read is returning this clock
  logic [GW-1:0] ld_k;      // group it belongs to
  logic        bt_v, bs_v;  // candidates returning this clock

  feature_t    a_reg [NG];
  logic [NG-1:0] g_en;
  logic        clear;

  logic [HD_BITS-1:0] hd_t [NG], hd_s [NG];
  xy_t               c_cur [NG], c_prev [NG], c_right [NG];
  match_result_t     res [NG];
  logic [NG-1:0]     keep;

  logic fifo_full, fifo_empty, push, tr_want;
  match_result_t fifo_din;

  assign busy  = (state != IDLE);
  assign clear = (state == CLEAR);
  assign n_run = (tr_en && n_p > n_r) ? n_p : n_r;

  // read addresses
  always_comb begin
    rl_addr = AW'(base + (AW+1)'(k));
    rr_addr = AW'(j);
    rp_addr = AW'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      base  <= '0;
      j     <= '0;
      k     <= '0;
      tr_en <= 1'b0;
      ld_v  <= 1'b0;
      ld_k  <= '0;
      bt_v  <= 1'b0;
      bs_v  <= 1'b0;
      g_en  <= '0;
    end else begin
      ld_v <= 1'b0;
      bt_v <= 1'b0;
      bs_v <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          base  <= '0;
          k     <= '0;
          tr_en <= trace_en;
          if (n_l != '0) state <= LOAD;
        end
        LOAD: begin
          if (k < GW'(NG)) begin
            ld_v <= 1'b1;
            ld_k <= k;
            for (int g = 0; g < NG; g++)
              if (k == GW'(g)) g_en[g] <= (base + (AW+1)'(g)) < n_l;
            k    <= k + 1'b1;
          end else if (!ld_v) begin
            state <= RUNNING;
            j     <= '0;
          end
        end
        RUNNING: begin
          if (j < n_run) begin
            bt_v <= tr_en && (j < n_p);
            bs_v <= j < n_r;
            j    <= j + 1'b1;
          end else if (!bt_v && !bs_v) begin
            state <= TRANSPORT;           // running done
            k     <= '0;
          end
        end
        TRANSPORT: begin
          if (k == GW'(NG))                      state <= CLEAR;
          else if (!tr_want || !fifo_full)      k <= k + 1'b1;
        end
        CLEAR: begin
          k <= '0;
          if (base + (AW+1)'(NG) >= n_l) state <= IDLE;
          else begin
            base  <= base + (AW+1)'(NG);
            state <= LOAD;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    for (int g = 0; g < NG; g++) if (ld_v && ld_k == GW'(g)) a_reg[g] <= rl_data;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    // the trace core's coord_a equals the stereo core's (A is shared)
    match_core u_t (
      .clk, .rst_n, .clear, .b_valid(bt_v && g_en[g]), .a(a_reg[g]), .b(rp_data),
      .hd(hd_t[g]), .coord_a(), .coord_b(c_prev[g]));
    match_core u_s (
      .clk, .rst_n, .clear, .b_valid(bs_v && g_en[g]), .a(a_reg[g]), .b(rr_data),
      .hd(hd_s[g]), .coord_a(c_cur[g]), .coord_b(c_right[g]));
    pair_check u_chk (
      .trace_en(tr_en), .hd_thresh, .y_tol, .max_disp,
      .hd_t(hd_t[g]), .hd_s(hd_s[g]),
      .cur(c_cur[g]), .prev(c_prev[g]), .right(c_right[g]),
      .result(res[g]), .keep(keep[g]));
  end

  always_comb begin
    tr_want  = 1'b0;
    fifo_din = res[0];
    for (int g = 0; g < NG; g++)
      if (state == TRANSPORT && k == GW'(g)) begin
        fifo_din = res[g];
        tr_want  = g_en[g] && keep[g];
      end
    push = tr_want && !fifo_full;
  end

  sync_fifo #(.DW($bits(match_result_t)), .DEPTH(FIFO_DEP)) u_tx (
    .clk, .rst_n, .push, .din(fifo_din), .full(fifo_full),
    .pop(m_valid && m_ready), .dout(m_data), .empty(fifo_empty));
  assign m_valid = !fifo_empty;
endmodule
