// partial_qr: the partial QR decomposition block. It triangularises one
// small dense matrix (the stacked, whitened factors around the variable
// being eliminated) with Householder reflections, one column per
// iteration, using one Evaluate unit and N_UPD Update units.
//
// Columns travel as whole vectors. The matrix enters as a column stream
// (column 0 first) through the Evaluate side: column 0 goes straight into
// the Evaluate unit, the other columns are dealt round-robin into the
// FIFOs that feed the Update units. The Update units and their FIFOs form
// a ring: unit u pops from FIFO u and pushes to FIFO u+1 (mod N_UPD), so
// every column visits the next unit in the next iteration and the load
// stays balanced. A tag carried with each column counts the reflections
// already applied to it; a unit only pops a column whose tag equals the
// iteration being applied.
//
// Evaluate/Update overlap: during iteration k the unit that updates column
// k+1 hands it to the Evaluate unit at once, so the reflection for k+1 is
// built while the other columns are still being updated with reflection
// k. The new reflection is broadcast (and the finished column k+1 is sent
// out) only when every column has received reflection k.
//
// nvar reflections are applied (the variable columns; nvar <= ROWS); the
// remaining columns (right-hand side) leave after the last iteration.
// Output columns carry their index and may leave out of order; rows of the
// result are R (upper triangular in the first nvar columns) and Q^T b.
// Control: pulse start, then stream ncol columns; done pulses after the
// last column has left.
//
// From the reference design: Evaluate/Update split, pipelining of the next
// Evaluate with the current Update, N_UPD time-multiplexed Update units
// joined by FIFOs. This design's choices: whole-column FIFO entries, the
// ring order, the tag-based dependency check and the barrier before each
// broadcast; all variable columns are triangularised, not only the
// eliminated variable's, so that the new factor is a small triangle.
module partial_qr
  import fp32_pkg::*;
#(
  parameter int ROWS  = 15,
  parameter int COLS  = 13,
  parameter int N_UPD = 4
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic [$clog2(COLS+1)-1:0]     nvar,
  input  logic [$clog2(COLS+1)-1:0]     ncol,
  // column stream in, index implied by order
  input  logic                          in_valid,
  output logic                          in_ready,
  input  fp32_t                         in_data [ROWS],
  // column stream out
  output logic                          out_valid,
  output logic [$clog2(COLS+1)-1:0]     out_idx,
  output fp32_t                         out_data [ROWS],
  output logic                          busy,
  output logic                          done,
  output logic                          overlap   // Evaluate busy while an Update unit is busy
);
  localparam int IW    = $clog2(COLS + 1);
  localparam int TW    = $clog2(ROWS + 2);
  localparam int RW    = $clog2(ROWS);
  localparam int W     = IW + TW + 32 * ROWS;
  localparam int DEPTH = (COLS - 1 + N_UPD - 1) / N_UPD + 1;
  localparam int UW    = (N_UPD > 1) ? $clog2(N_UPD) : 1;

  typedef enum logic [1:0] {P_IDLE, P_LOAD, P_RUN} phase_e;
  phase_e phase;

  // ---------------- column packing ----------------
  function automatic logic [W-1:0] pack(input logic [IW-1:0] idx, input logic [TW-1:0] tag,
                                        input fp32_t d [ROWS]);
    logic [W-1:0] w;
    w[W-1 -: IW]      = idx;
    w[W-IW-1 -: TW]   = tag;
    for (int r = 0; r < ROWS; r++) w[32*r +: 32] = d[r];
    return w;
  endfunction

  // ---------------- state ----------------
  logic [IW-1:0] load_cnt;
  logic [UW-1:0] load_fifo;
  logic [IW-1:0] cur;          // iteration whose reflection is broadcast
  logic          hh_valid;     // a reflection has been broadcast
  logic          ev_ready;     // Evaluate finished, waiting for the barrier
  fp32_t         hh_v [ROWS];
  fp32_t         hh_beta;
  logic [RW-1:0] hh_p;

  // ---------------- Evaluate unit ----------------
  logic          ev_start, ev_busy, ev_done;
  logic [RW-1:0] ev_pivot;
  fp32_t         ev_col [ROWS];
  fp32_t         ev_v [ROWS], ev_rcol [ROWS];
  fp32_t         ev_beta;

  qr_evaluate #(.ROWS(ROWS)) u_eval (
    .clk, .rst, .start(ev_start), .pivot(ev_pivot), .col_in(ev_col),
    .busy(ev_busy), .done(ev_done), .v(ev_v), .beta(ev_beta), .r_col(ev_rcol)
  );

  // ---------------- Update units and FIFO ring ----------------
  logic          f_push [N_UPD], f_pop [N_UPD], f_empty [N_UPD], f_full [N_UPD];
  logic [W-1:0]  f_wdata [N_UPD], f_rdata [N_UPD];
  logic          u_in_valid [N_UPD], u_in_ready [N_UPD];
  logic          u_out_valid [N_UPD], u_out_ready [N_UPD], u_busy [N_UPD];
  fp32_t         u_in_data [N_UPD][ROWS], u_out_data [N_UPD][ROWS];
  logic [IW-1:0] u_in_idx [N_UPD], u_out_idx [N_UPD];
  logic [TW-1:0] u_in_tag [N_UPD], u_out_tag [N_UPD];

  // routing of each unit's result
  logic          to_eval [N_UPD], to_out [N_UPD], to_ring [N_UPD];
  logic          drain_grant [N_UPD];

  for (genvar g = 0; g < N_UPD; g++) begin : g_unit
    qr_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst, .push(f_push[g]), .wr_data(f_wdata[g]), .pop(f_pop[g]),
      .rd_data(f_rdata[g]), .empty(f_empty[g]), .full(f_full[g])
    );

    always_comb begin
      u_in_idx[g] = f_rdata[g][W-1 -: IW];
      u_in_tag[g] = f_rdata[g][W-IW-1 -: TW];
      for (int r = 0; r < ROWS; r++) u_in_data[g][r] = f_rdata[g][32*r +: 32];
    end

    assign u_in_valid[g] = (phase == P_RUN) && hh_valid && !f_empty[g]
                           && (u_in_tag[g] == TW'(cur));
    assign f_pop[g]      = u_in_valid[g] && u_in_ready[g];

    qr_update #(.ROWS(ROWS), .IW(IW), .TW(TW)) u_upd (
      .clk, .rst, .hh_v(hh_v), .hh_beta(hh_beta), .hh_p(hh_p),
      .in_valid(u_in_valid[g]), .in_ready(u_in_ready[g]), .in_data(u_in_data[g]),
      .in_idx(u_in_idx[g]), .in_tag(u_in_tag[g]),
      .out_valid(u_out_valid[g]), .out_ready(u_out_ready[g]), .out_data(u_out_data[g]),
      .out_idx(u_out_idx[g]), .out_tag(u_out_tag[g]), .busy(u_busy[g])
    );

    assign to_out[g]  = u_out_valid[g] && (cur + 1'b1 >= nvar);
    assign to_eval[g] = u_out_valid[g] && !to_out[g] && (u_out_idx[g] == cur + 1'b1);
    assign to_ring[g] = u_out_valid[g] && !to_out[g] && !to_eval[g];
    assign u_out_ready[g] = to_out[g]  ? drain_grant[g]
                          : to_eval[g] ? 1'b1
                          : !f_full[(g + 1) % N_UPD];
  end

  // drain arbiter: lowest-numbered unit first
  always_comb begin
    logic taken;
    taken = 1'b0;
    for (int u = 0; u < N_UPD; u++) begin
      drain_grant[u] = to_out[u] && !taken;
      if (to_out[u]) taken = 1'b1;
    end
  end

  // FIFO write side: loader during LOAD, previous unit during RUN
  always_comb begin
    for (int u = 0; u < N_UPD; u++) begin
      int pu;
      pu = (u + N_UPD - 1) % N_UPD;
      if (phase == P_LOAD) begin
        f_push[u]  = in_valid && in_ready && (load_cnt != '0) && (load_fifo == UW'(u));
        f_wdata[u] = pack(load_cnt, '0, in_data);
      end else begin
        f_push[u]  = to_ring[pu] && u_out_ready[pu];
        f_wdata[u] = pack(u_out_idx[pu], u_out_tag[pu], u_out_data[pu]);
      end
    end
  end

  // Evaluate start: column 0 from the input, later columns from a unit
  always_comb begin
    ev_start = 1'b0;
    ev_pivot = '0;
    ev_col   = in_data;
    if (phase == P_LOAD) begin
      ev_start = in_valid && in_ready && (load_cnt == '0);
    end else begin
      for (int u = 0; u < N_UPD; u++) begin
        if (to_eval[u]) begin
          ev_start = 1'b1;
          ev_pivot = RW'(u_out_idx[u]);
          ev_col   = u_out_data[u];
        end
      end
    end
  end

  // barrier: all columns have received the current reflection
  logic iter_clear, all_idle;
  always_comb begin
    iter_clear = 1'b1;
    all_idle   = 1'b1;
    for (int u = 0; u < N_UPD; u++) begin
      if (u_busy[u] || (!f_empty[u] && u_in_tag[u] == TW'(cur))) iter_clear = 1'b0;
      if (u_busy[u] || !f_empty[u]) all_idle = 1'b0;
    end
  end

  logic          broadcast;
  logic [IW-1:0] hh_p_next;   // pivot of the reflection to broadcast next
  assign hh_p_next = hh_valid ? cur + 1'b1 : '0;
  assign broadcast = (phase == P_RUN) && ev_ready && (!hh_valid || iter_clear);

  assign in_ready = (phase == P_LOAD) && !ev_busy;
  assign busy     = (phase != P_IDLE);

  always_comb begin
    logic any_upd;
    any_upd = 1'b0;
    for (int u = 0; u < N_UPD; u++) any_upd = any_upd | u_busy[u];
    overlap = ev_busy && any_upd;
  end

  // output mux
  always_comb begin
    out_valid = 1'b0;
    out_idx   = '0;
    out_data  = ev_rcol;
    if (broadcast) begin
      out_valid = 1'b1;
      out_idx   = IW'(hh_p_next);
    end else begin
      for (int u = N_UPD - 1; u >= 0; u--) begin
        if (drain_grant[u]) begin
          out_valid = 1'b1;
          out_idx   = u_out_idx[u];
          out_data  = u_out_data[u];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= P_IDLE;
      load_cnt  <= '0;
      load_fifo <= '0;
      cur       <= '0;
      hh_valid  <= 1'b0;
      ev_ready  <= 1'b0;
      hh_beta   <= FP_ZERO;
      hh_p      <= '0;
      done      <= 1'b0;
      for (int r = 0; r < ROWS; r++) hh_v[r] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      if (ev_done) ev_ready <= 1'b1;
      unique case (phase)
        P_IDLE: if (start) begin
          phase     <= P_LOAD;
          load_cnt  <= '0;
          load_fifo <= '0;
          cur       <= '0;
          hh_valid  <= 1'b0;
          ev_ready  <= 1'b0;
        end
        P_LOAD: if (in_valid && in_ready) begin
          if (load_cnt != '0)
            load_fifo <= (load_fifo == UW'(N_UPD - 1)) ? '0 : load_fifo + 1'b1;
          load_cnt <= load_cnt + 1'b1;
          if (load_cnt == ncol - 1'b1) phase <= P_RUN;
        end
        P_RUN: begin
          if (broadcast) begin
            hh_v     <= ev_v;
            hh_beta  <= ev_beta;
            hh_p     <= RW'(hh_p_next);
            cur      <= hh_p_next;
            hh_valid <= 1'b1;
            ev_ready <= 1'b0;
          end else if (hh_valid && cur == nvar - 1'b1 && all_idle && !ev_busy && !ev_ready) begin
            phase <= P_IDLE;
            done  <= 1'b1;
          end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  a_nvar_fits: assert property (@(posedge clk) disable iff (rst) start |-> (nvar <= IW'(ROWS) && nvar < ncol));
endmodule
