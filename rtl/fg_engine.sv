// fg_engine: one of the two identical sets of storage and matrix units of
// the accelerator (RAM, matrix construction, partial QR, back
// substitution). Two engines work on the two ends of the LQR factor graph
// at the same time.
//
// Elimination. The factor graph of an N-step LQR problem has states
// x_0..x_N and controls u_0..u_{N-1}. The left engine (SIDE = 0)
// eliminates x_0, u_0, x_1, u_1, ... u_{MID-1}; the right engine (SIDE = 1)
// eliminates x_N, u_{N-1}, x_{N-1}, ... u_MID. Each elimination gathers the
// factors touching the variable into a small dense matrix (matrix
// construction), triangularises it in the partial QR block (matrix
// decomposition), keeps the first rows as a conditional for back
// substitution and writes the remaining rows back to the RAM as the new
// factor on the neighbouring variables. Matrices, columns in order
// [frontal | separators | rhs], rows zero-padded to ROWS = 3*NX:
//   state x_k  : rows Q^1/2 ; dynamics [-P^1/2 A | -P^1/2 B | P^1/2]
//                (column order mirrored on the right) ; carried factor on
//                x_k or, for x_0, the prior P^1/2 (x_0 - x_init)
//                -> NX conditional rows, NX+NU factor rows on (u, x_next)
//   control u_k: rows R^1/2 ; carried factor on (u_k, x_next)
//                -> NU conditional rows, NX factor rows on x_next
//   middle x_MID (left engine, command OP_MID): rows Q^1/2, the left
//                factor and the factor imported from the right engine
//                -> NX conditional rows
// Conditional c of an engine belongs to its c-th elimination (the middle
// state is conditional 2*MID of the left engine).
//
// Commands (cmd_start with cmd_op): OP_SWEEP runs all eliminations of this
// side, OP_MID the middle one, OP_BACKSUB solves conditionals bs_hi down to
// bs_lo. done pulses when the command ends. While idle, the RAM is
// reachable from outside (whitening writes, factor export and import).
//
// From the reference design: two engines eliminating from both ends to the
// middle, matrix construction then partial QR per variable, back
// substitution on the stored R. This design's choices: RAM row formats,
// the order of the construction reads (DEPTH cycles, one RAM row each),
// the exchange of the middle factor, and that the right-hand side travels
// as the last matrix column.
module fg_engine
  import fp32_pkg::*;
  import fglqr_pkg::*;
#(
  parameter int NX    = NX_DEF,
  parameter int NU    = NU_DEF,
  parameter int N     = N_DEF,
  parameter int MID   = N_DEF / 2,
  parameter bit SIDE  = 1'b0,
  parameter int N_UPD = N_UPD_DEF,
  localparam int ROWS  = 3 * NX,
  localparam int COLS  = 2 * NX + NU + 1,
  localparam int DEPTH = 3 * NX + NU + 2,
  localparam int NCOND = N + 1,
  localparam int NSOL  = (N + 1) * NX + N * NU,
  localparam int AW    = $clog2(DEPTH),
  localparam int CW    = $clog2(NCOND),
  localparam int SW    = $clog2(NSOL)
) (
  input  logic          clk,
  input  logic          rst,
  // RAM access while idle
  input  logic          ext_we,
  input  logic [AW-1:0] ext_waddr,
  input  fp32_t         ext_wdata [COLS],
  input  logic [AW-1:0] ext_raddr,
  output fp32_t         ext_rdata [COLS],
  // command
  input  logic          cmd_start,
  input  eng_op_e       cmd_op,
  input  logic [CW-1:0] bs_lo,
  input  logic [CW-1:0] bs_hi,
  output logic          busy,
  output logic          done,
  // solution memory
  input  logic          sw_en,
  input  logic [SW-1:0] sw_addr,
  input  fp32_t         sw_data,
  input  logic [SW-1:0] sr_addr,
  output fp32_t         sr_data,
  // activity
  output logic          qr_overlap,
  output logic          elim_done    // pulses when one elimination is stored
);
  localparam int A_DIAG  = 0;
  localparam int A_DYN   = 1;
  localparam int A_PRIOR = NX + 1;
  localparam int A_FACT  = NX + 2;
  localparam int A_MIDF  = A_FACT + NX + NU;
  localparam int NSTEPS  = SIDE ? 2 * (N - MID) : 2 * MID;
  localparam int IW      = $clog2(COLS + 1);
  localparam int FW      = $clog2(NX);

  typedef enum logic [1:0] {T_X, T_U, T_MID} step_e;
  typedef enum logic [2:0] {E_IDLE, E_READ, E_FEED, E_QR, E_STORE, E_BS} estate_e;
  estate_e state;

  // ---------------- step bookkeeping ----------------
  logic [CW-1:0] s;          // elimination index = conditional index
  step_e         stype;
  int            kk;         // time index of the eliminated variable
  logic          mid_op;

  always_comb begin
    if (mid_op) begin
      stype = T_MID;
      kk    = MID;
    end else begin
      stype = s[0] ? T_U : T_X;
      if (!SIDE) kk = int'(s) / 2;
      else       kk = s[0] ? N - 1 - int'(s) / 2 : N - int'(s) / 2;
    end
  end

  function automatic logic [15:0] xaddr(input int k);
    return 16'(k * NX);
  endfunction
  function automatic logic [15:0] uaddr(input int k);
    return 16'((N + 1) * NX + k * NU);
  endfunction

  logic [IW-1:0] nvar, ncol;
  int            nf, nfact;
  logic          use_prior, use_fact;
  cond_hdr_t     hdr;
  always_comb begin
    hdr       = '0;
    use_prior = (stype == T_X) && !SIDE && (kk == 0);
    use_fact  = !((stype == T_X) && ((!SIDE && kk == 0) || (SIDE && kk == N)));
    unique case (stype)
      T_X: begin
        nvar = IW'(2 * NX + NU); ncol = IW'(COLS); nf = NX; nfact = NX + NU;
        hdr.front_base = xaddr(kk);
        hdr.nf = 4'(NX); hdr.ns = 4'(NU + NX); hdr.sep0_len = 4'(NU);
        hdr.sep0_base = SIDE ? uaddr(kk - 1) : uaddr(kk);
        hdr.sep1_base = SIDE ? xaddr(kk - 1) : xaddr(kk + 1);
      end
      T_U: begin
        nvar = IW'(NU + NX); ncol = IW'(NU + NX + 1); nf = NU; nfact = NX;
        hdr.front_base = uaddr(kk);
        hdr.nf = 4'(NU); hdr.ns = 4'(NX); hdr.sep0_len = 4'(NX);
        hdr.sep0_base = SIDE ? xaddr(kk) : xaddr(kk + 1);
      end
      default: begin
        nvar = IW'(NX); ncol = IW'(NX + 1); nf = NX; nfact = 0;
        hdr.front_base = xaddr(MID);
        hdr.nf = 4'(NX);
      end
    endcase
  end

  // ---------------- RAM ----------------
  logic          ram_we;
  logic [AW-1:0] ram_waddr, ram_raddr;
  fp32_t         ram_wdata [COLS], ram_rdata [COLS];
  logic [AW-1:0] rd, rd_d;
  logic          rd_valid;
  int            st;          // store counter

  fg_ram #(.COLS(COLS), .DEPTH(DEPTH)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .raddr(ram_raddr), .rdata(ram_rdata)
  );
  assign ext_rdata = ram_rdata;
  assign ram_raddr = (state == E_READ) ? rd : ext_raddr;

  // ---------------- work matrix ----------------
  fp32_t W [ROWS][COLS];

  // ---------------- partial QR ----------------
  logic          qr_start, qr_in_valid, qr_in_ready, qr_out_valid, qr_busy, qr_done;
  logic [IW-1:0] qr_out_idx, feed_c;
  fp32_t         qr_in_data [ROWS], qr_out_data [ROWS];

  always_comb for (int r = 0; r < ROWS; r++) qr_in_data[r] = W[r][feed_c];
  assign qr_in_valid = (state == E_FEED);

  partial_qr #(.ROWS(ROWS), .COLS(COLS), .N_UPD(N_UPD)) u_qr (
    .clk, .rst, .start(qr_start), .nvar(nvar), .ncol(ncol),
    .in_valid(qr_in_valid), .in_ready(qr_in_ready), .in_data(qr_in_data),
    .out_valid(qr_out_valid), .out_idx(qr_out_idx), .out_data(qr_out_data),
    .busy(qr_busy), .done(qr_done), .overlap(qr_overlap)
  );

  // ---------------- back substitution ----------------
  logic  cw_en, ch_en, bs_start, bs_busy, bs_done;
  fp32_t cw_data [COLS];

  always_comb begin
    cw_data = W[0];
    for (int r = 1; r < NX; r++) if (st == r) cw_data = W[r];
  end
  assign cw_en = (state == E_STORE) && (st < nf);
  assign ch_en = (state == E_STORE) && (st == 0);

  back_sub #(.NX(NX), .NU(NU), .N(N), .NCOND(NCOND), .FMAX(NX), .COLS(COLS)) u_bs (
    .clk, .rst,
    .cw_en(cw_en), .cw_idx(s), .cw_row(FW'(st)), .cw_data(cw_data),
    .ch_en(ch_en), .ch_idx(s), .ch_hdr(hdr),
    .sw_en(sw_en), .sw_addr(sw_addr), .sw_data(sw_data),
    .sr_addr(sr_addr), .sr_data(sr_data),
    .start(bs_start), .lo(bs_lo), .hi(bs_hi), .busy(bs_busy), .done(bs_done)
  );

  // factor rows written back to the RAM after a decomposition
  always_comb begin
    int fr;
    fr = st - nf;
    ram_we    = ext_we;
    ram_waddr = ext_waddr;
    ram_wdata = ext_wdata;
    if (state == E_STORE && st >= nf) begin
      ram_we    = 1'b1;
      ram_waddr = AW'(A_FACT + fr);
      for (int c = 0; c < COLS; c++) ram_wdata[c] = FP_ZERO;
      if (stype == T_X) begin
        for (int f = 0; f < NX + NU; f++)
          if (fr == f)
            for (int c = 0; c < NU + NX + 1; c++) ram_wdata[c] = W[(NX + f) % ROWS][NX + c];
      end else begin
        for (int f = 0; f < NX; f++)
          if (fr == f)
            for (int c = 0; c < NX + 1; c++) ram_wdata[c] = W[(NU + f) % ROWS][NU + c];
      end
    end
  end

  assign busy = (state != E_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= E_IDLE;
      done      <= 1'b0;
      elim_done <= 1'b0;
      qr_start  <= 1'b0;
      bs_start  <= 1'b0;
      s         <= '0;
      mid_op    <= 1'b0;
      rd        <= '0;
      rd_d      <= '0;
      rd_valid  <= 1'b0;
      feed_c    <= '0;
      st        <= 0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) W[r][c] <= FP_ZERO;
    end else begin
      done      <= 1'b0;
      elim_done <= 1'b0;
      qr_start  <= 1'b0;
      bs_start  <= 1'b0;
      rd_d      <= rd;
      rd_valid  <= (state == E_READ);

      // matrix construction: place each RAM row as it arrives. Every
      // matrix entry compares the RAM row address with constants, so the
      // placement is a set of small per-entry write enables.
      if (rd_valid) begin
        for (int r = 0; r < ROWS; r++) begin
          for (int c = 0; c < COLS; c++) begin
            // Q^1/2 or R^1/2 on the diagonal
            if (rd_d == AW'(A_DIAG) && r == c) begin
              if (stype == T_U && r < NU)  W[r][c] <= ram_rdata[(NX + r) % COLS];
              if (stype != T_U && r < NX)  W[r][c] <= ram_rdata[r % COLS];
            end
            // dynamics rows (state steps only)
            if (stype == T_X && r >= NX && r < 2 * NX && rd_d == AW'(A_DYN + r - NX)) begin
              if (!SIDE) begin
                if (c < NX + NU)     W[r][c] <= ram_rdata[c % COLS];
                if (c == NU + r)     W[r][c] <= ram_rdata[NX + NU];
              end else begin
                if (c == r - NX)     W[r][c] <= ram_rdata[NX + NU];
                if (c >= NX && c < NX + NU)
                                     W[r][c] <= ram_rdata[c % COLS];
                if (c >= NX + NU && c < 2 * NX + NU)
                                     W[r][c] <= ram_rdata[(c + COLS - NX - NU) % COLS];
              end
            end
            // prior on x_0: weight equal to the dynamics weight of its row
            if (use_prior && r >= 2 * NX && c == r - 2 * NX &&
                rd_d == AW'(A_DYN + r - 2 * NX))
              W[r][c] <= ram_rdata[NX + NU];
            // prior right-hand side
            if (use_prior && r >= 2 * NX && c == COLS - 1 && rd_d == AW'(A_PRIOR))
              W[r][c] <= ram_rdata[(r + COLS - 2 * NX) % COLS];
            // factor carried from the previous elimination
            if (use_fact) begin
              if (stype == T_U && r >= NU && r < 2 * NU + NX && c < NU + NX + 1 &&
                  rd_d == AW'(A_FACT + r - NU))
                W[r][c] <= ram_rdata[c % COLS];
              if (stype == T_X && r >= 2 * NX && rd_d == AW'(A_FACT + r - 2 * NX)) begin
                if (c < NX)        W[r][c] <= ram_rdata[c % COLS];
                if (c == COLS - 1) W[r][c] <= ram_rdata[NX];
              end
              if (stype == T_MID && r >= NX && r < 2 * NX && rd_d == AW'(A_FACT + r - NX)) begin
                if (c < NX)        W[r][c] <= ram_rdata[c % COLS];
                if (c == NX)       W[r][c] <= ram_rdata[NX];
              end
            end
            // factor imported from the other engine (middle step)
            if (stype == T_MID && r >= 2 * NX && rd_d == AW'(A_MIDF + r - 2 * NX)) begin
              if (c < NX)          W[r][c] <= ram_rdata[c % COLS];
              if (c == NX)         W[r][c] <= ram_rdata[NX];
            end
          end
        end
      end

      // decomposition results, column by column
      if (qr_out_valid)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (qr_out_idx == IW'(c)) W[r][c] <= qr_out_data[r];

      unique case (state)
        E_IDLE: if (cmd_start) begin
          if (cmd_op == OP_BACKSUB) begin
            bs_start <= 1'b1;
            state    <= E_BS;
          end else begin
            mid_op <= (cmd_op == OP_MID);
            s      <= (cmd_op == OP_MID) ? CW'(2 * MID) : '0;
            rd     <= '0;
            state  <= E_READ;
            for (int r = 0; r < ROWS; r++)
              for (int c = 0; c < COLS; c++) W[r][c] <= FP_ZERO;
          end
        end
        E_READ: begin
          if (rd == AW'(DEPTH - 1)) state <= E_FEED;
          else rd <= rd + 1'b1;
          if (rd == AW'(DEPTH - 1)) begin
            qr_start <= 1'b1;
            feed_c   <= '0;
          end
        end
        E_FEED: if (qr_in_ready && !rd_valid) begin
          if (feed_c == ncol - 1'b1) state <= E_QR;
          feed_c <= feed_c + 1'b1;
        end
        E_QR: if (qr_done) begin
          st    <= 0;
          state <= E_STORE;
        end
        E_STORE: begin
          if (st == nf + nfact - 1) begin
            elim_done <= 1'b1;
            if (mid_op || int'(s) == NSTEPS - 1) begin
              done   <= 1'b1;
              mid_op <= 1'b0;
              state  <= E_IDLE;
            end else begin
              s     <= s + 1'b1;
              rd    <= '0;
              state <= E_READ;
              for (int r = 0; r < ROWS; r++)
                for (int c = 0; c < COLS; c++) W[r][c] <= FP_ZERO;
            end
          end
          st <= st + 1;
        end
        E_BS: if (bs_done) begin
          done  <= 1'b1;
          state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // only the left engine runs the middle elimination
  if (SIDE) begin : g_right
    a_mid_left_only: assert property (@(posedge clk) disable iff (rst)
                       !(cmd_start && cmd_op == OP_MID));
  end
endmodule
