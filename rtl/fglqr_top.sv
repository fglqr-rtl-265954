// fglqr_top: factor-graph LQR accelerator. It solves the finite-horizon
// LQR problem
//     min  sum_k x_k'Q x_k + u_k'R u_k + d_k'P d_k (+ x_N'Q x_N),
//     d_k = x_{k+1} - A x_k - B u_k,
// in which the dynamics are a heavily weighted least-squares term
// (P = 2^e * I) instead of a hard constraint, so that every factor of the
// graph is an ordinary Gaussian factor. The measured state enters as a
// prior P^1/2 (x_0 - x_init). The result is the whole trajectory x_0..x_N
// and the controls u_0..u_{N-1}.
//
// Data flow: host -> input buffer -> whitening -> RAM of both engines.
// The left engine eliminates x_0, u_0, ... u_{MID-1}, the right engine
// x_N, u_{N-1}, ... u_MID, at the same time (no factor is shared between
// the two sweeps). The right engine's last factor, on x_MID, is copied into
// the left engine, which eliminates x_MID and solves it by back
// substitution. x_MID is copied into the right engine's solution memory
// and both engines back-substitute outwards in parallel.
//
// Interface: the host writes the problem through ib_* (address map in
// input_buffer) while idle, pulses start and waits for done. The solution
// is then read word by word, asynchronously: x_k[i] at k*NX + i,
// u_k[i] at (N+1)*NX + k*NU + i. stat_* outputs expose activity for
// performance counting.
//
// From the reference design: the block structure (input buffer, whitening,
// RAM_1/RAM_2, two partial-QR and two back-substitution blocks), the
// least-squares dynamics and the both-ends-to-the-middle elimination. This
// design's choices: the prior on x_0, the middle-state hand-over between
// the engines and the command sequence below.
module fglqr_top
  import fp32_pkg::*;
  import fglqr_pkg::*;
#(
  parameter int NX    = NX_DEF,
  parameter int NU    = NU_DEF,
  parameter int N     = N_DEF,
  parameter int N_UPD = N_UPD_DEF,
  localparam int MID    = N / 2,
  localparam int COLS   = 2 * NX + NU + 1,
  localparam int DEPTH  = 3 * NX + NU + 2,
  localparam int NSOL   = (N + 1) * NX + N * NU,
  localparam int NWORDS = NX * NX + NX * NU + 3 * NX + NU,
  localparam int AW     = $clog2(DEPTH),
  localparam int CW     = $clog2(N + 1),
  localparam int SW     = $clog2(NSOL)
) (
  input  logic                      clk,
  input  logic                      rst,
  // problem load
  input  logic                      ib_we,
  input  logic [$clog2(NWORDS)-1:0] ib_waddr,
  input  fp32_t                     ib_wdata,
  // control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // solution read
  input  logic [SW-1:0]             res_addr,
  output fp32_t                     res_data,
  // activity
  output logic                      stat_parallel,   // both engines eliminating
  output logic                      stat_qr_overlap, // Evaluate/Update overlap in an engine
  output logic [1:0]                stat_elim        // an engine stored an elimination
);
  localparam int A_FACT = NX + 2;
  localparam int A_MIDF = A_FACT + NX + NU;

  typedef enum logic [3:0] {
    T_IDLE, T_WHITE, T_SWEEP, T_XFER, T_MID, T_BSMID, T_XM, T_BS
  } tstate_e;
  tstate_e state;

  // ---------------- input buffer + whitening ----------------
  logic [$clog2(NX)-1:0] ib_row;
  fp32_t a_row [NX], b_row [NU], q_r, r_r, p_r, x0_r;

  input_buffer #(.NX(NX), .NU(NU)) u_ib (
    .clk, .we(ib_we && state == T_IDLE), .waddr(ib_waddr), .wdata(ib_wdata),
    .row(ib_row), .a_row, .b_row, .q_r, .r_r, .p_r, .x0_r
  );

  logic          wh_start, wh_busy, wh_done, wh_we;
  logic [AW-1:0] wh_waddr;
  fp32_t         wh_wdata [COLS];

  whitening #(.NX(NX), .NU(NU), .COLS(COLS), .DEPTH(DEPTH)) u_white (
    .clk, .rst, .start(wh_start), .busy(wh_busy), .done(wh_done),
    .ib_row, .a_row, .b_row, .q_r, .r_r, .p_r, .x0_r,
    .ram_we(wh_we), .ram_waddr(wh_waddr), .ram_wdata(wh_wdata)
  );

  // ---------------- engines ----------------
  logic          e_we [2];
  logic [AW-1:0] e_waddr [2], e_raddr [2];
  fp32_t         e_wdata [2][COLS], e_rdata [2][COLS];
  logic          e_start [2], e_busy [2], e_done [2], e_sw_en [2], e_ovl [2], e_elim [2];
  eng_op_e       e_op [2];
  logic [CW-1:0] e_lo [2], e_hi [2];
  logic [SW-1:0] e_sw_addr [2], e_sr_addr [2];
  fp32_t         e_sw_data [2], e_sr_data [2];

  fg_engine #(.NX(NX), .NU(NU), .N(N), .MID(MID), .SIDE(1'b0), .N_UPD(N_UPD)) u_eng_left (
    .clk, .rst,
    .ext_we(e_we[0]), .ext_waddr(e_waddr[0]), .ext_wdata(e_wdata[0]),
    .ext_raddr(e_raddr[0]), .ext_rdata(e_rdata[0]),
    .cmd_start(e_start[0]), .cmd_op(e_op[0]), .bs_lo(e_lo[0]), .bs_hi(e_hi[0]),
    .busy(e_busy[0]), .done(e_done[0]),
    .sw_en(e_sw_en[0]), .sw_addr(e_sw_addr[0]), .sw_data(e_sw_data[0]),
    .sr_addr(e_sr_addr[0]), .sr_data(e_sr_data[0]),
    .qr_overlap(e_ovl[0]), .elim_done(e_elim[0])
  );

  fg_engine #(.NX(NX), .NU(NU), .N(N), .MID(MID), .SIDE(1'b1), .N_UPD(N_UPD)) u_eng_right (
    .clk, .rst,
    .ext_we(e_we[1]), .ext_waddr(e_waddr[1]), .ext_wdata(e_wdata[1]),
    .ext_raddr(e_raddr[1]), .ext_rdata(e_rdata[1]),
    .cmd_start(e_start[1]), .cmd_op(e_op[1]), .bs_lo(e_lo[1]), .bs_hi(e_hi[1]),
    .busy(e_busy[1]), .done(e_done[1]),
    .sw_en(e_sw_en[1]), .sw_addr(e_sw_addr[1]), .sw_data(e_sw_data[1]),
    .sr_addr(e_sr_addr[1]), .sr_data(e_sr_data[1]),
    .qr_overlap(e_ovl[1]), .elim_done(e_elim[1])
  );

  // ---------------- sequencing ----------------
  logic [1:0]    fin;      // engine finished the current command
  int            xc;       // transfer counter
  logic          xc_valid;
  int            xc_d;

  // RAM ports: whitening broadcast, or the middle-factor transfer
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      e_we[e]    = wh_we;
      e_waddr[e] = wh_waddr;
      e_wdata[e] = wh_wdata;
      e_raddr[e] = '0;
    end
    e_raddr[1] = AW'(A_FACT + ((xc < NX) ? xc : 0));
    if (state == T_XFER) begin
      e_we[0]    = xc_valid;
      e_waddr[0] = AW'(A_MIDF + xc_d);
      e_wdata[0] = e_rdata[1];
      e_we[1]    = 1'b0;
    end
  end

  // solution ports: x_MID hand-over, otherwise result readout
  logic res_left;
  always_comb begin
    int a;
    a = int'(res_addr);
    if (a < (N + 1) * NX) res_left = (a / NX) <= MID;
    else                  res_left = ((a - (N + 1) * NX) / NU) < MID;
    e_sr_addr[0] = (state == T_XM) ? SW'(MID * NX + ((xc < NX) ? xc : 0)) : res_addr;
    e_sr_addr[1] = res_addr;
    res_data     = res_left ? e_sr_data[0] : e_sr_data[1];
    e_sw_en[0]   = 1'b0;
    e_sw_addr[0] = '0;
    e_sw_data[0] = FP_ZERO;
    e_sw_en[1]   = (state == T_XM) && (xc < NX);
    e_sw_addr[1] = SW'(MID * NX + ((xc < NX) ? xc : 0));
    e_sw_data[1] = e_sr_data[0];
  end

  assign busy            = (state != T_IDLE);
  assign stat_parallel   = (state == T_SWEEP) && e_busy[0] && e_busy[1];
  assign stat_qr_overlap = e_ovl[0] || e_ovl[1];
  assign stat_elim       = {e_elim[1], e_elim[0]};

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= T_IDLE;
      done     <= 1'b0;
      wh_start <= 1'b0;
      fin      <= '0;
      xc       <= 0;
      xc_d     <= 0;
      xc_valid <= 1'b0;
      for (int e = 0; e < 2; e++) begin
        e_start[e] <= 1'b0;
        e_op[e]    <= OP_SWEEP;
        e_lo[e]    <= '0;
        e_hi[e]    <= '0;
      end
    end else begin
      done     <= 1'b0;
      wh_start <= 1'b0;
      for (int e = 0; e < 2; e++) begin
        e_start[e] <= 1'b0;
        if (e_done[e]) fin[e] <= 1'b1;
      end
      xc_d     <= xc;
      xc_valid <= 1'b0;

      unique case (state)
        T_IDLE: if (start) begin
          wh_start <= 1'b1;
          state    <= T_WHITE;
        end
        T_WHITE: if (wh_done) begin
          fin <= '0;
          for (int e = 0; e < 2; e++) begin
            e_start[e] <= 1'b1;
            e_op[e]    <= OP_SWEEP;
          end
          state <= T_SWEEP;
        end
        T_SWEEP: if (fin == 2'b11) begin
          xc    <= 0;
          state <= T_XFER;
        end
        T_XFER: begin
          // read right RAM row xc, write left RAM one cycle later
          xc_valid <= (xc < NX);
          xc       <= xc + 1;
          if (xc == NX) begin
            fin        <= '0;
            e_start[0] <= 1'b1;
            e_op[0]    <= OP_MID;
            state      <= T_MID;
          end
        end
        T_MID: if (fin[0]) begin
          fin        <= '0;
          e_start[0] <= 1'b1;
          e_op[0]    <= OP_BACKSUB;
          e_lo[0]    <= CW'(2 * MID);
          e_hi[0]    <= CW'(2 * MID);
          state      <= T_BSMID;
        end
        T_BSMID: if (fin[0]) begin
          xc    <= 0;
          state <= T_XM;
        end
        T_XM: begin
          xc <= xc + 1;
          if (xc == NX - 1) begin
            fin        <= '0;
            e_start[0] <= 1'b1;
            e_op[0]    <= OP_BACKSUB;
            e_lo[0]    <= '0;
            e_hi[0]    <= CW'(2 * MID - 1);
            e_start[1] <= 1'b1;
            e_op[1]    <= OP_BACKSUB;
            e_lo[1]    <= '0;
            e_hi[1]    <= CW'(2 * (N - MID) - 1);
            state      <= T_BS;
          end
        end
        T_BS: if (fin == 2'b11) begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // the horizon must give each engine at least one step
  if (N < 2) begin : g_bad_n
    $error("fglqr_top needs N >= 2");
  end
endmodule
