// olm_stage -- one unrolled iteration j of the radix-2 online multiplier,
// with the pipeline registers it writes.
//
// Stage j (j = -DELTA .. N-1) works on the operand pair that entered the
// pipeline j+DELTA+1 cycles earlier. It receives 2w[j] in carry-save form,
// the operand prefixes x[j], y[j] in two's complement (with their
// "minus one ulp" companions when a later append needs them) and the new
// digits x_{j+4}, y_{j+4}. Depending on j it is built as one of three kinds:
//   initialization (j < 0)       : append digits, [4:2] add; no V, SELM, M,
//                                   no output digit, w[j+1] = v[j].
//   recurrence (0 <= j <= N-4)   : append, select, [4:2] add, V, SELM, M.
//   last DELTA (j > N-4)         : inputs are zero, so v[j] = 2w[j]; only
//                                   V, SELM and M remain.
// v[j] = 2w[j] + (x[j] y_{j+4} + y[j+1] x_{j+4}) 2^-3,
// z_{j+1} = SELM(v_hat[j]),  w[j+1] = v[j] - z_{j+1}.
// Every width comes from olm_pkg: v[j] has F fractional bits, the output
// registers keep only what the next stage uses, so bit slices are added
// while digits arrive and dropped once the working precision or the end of
// the computation makes them irrelevant (floor truncation).
//
// Timing: combinational from the input registers (previous stage) to this
// stage's registers; every data register loads on the clock edge when
// valid_i and act_i are high and holds otherwise. act_i low means the
// operation was given a precision below j+1 digits, so this iteration is
// skipped (variable precision); holding on bubbles is an own choice that
// keeps idle stages from switching. valid_o follows valid_i one cycle later
// and is reset by rst_n; datapath registers are not reset.
// Register formats: ws_o = 2w[j+1] sum vector, 2 integer + RF fractional
// bits. wc_o = carry vector: full width after an initialization stage,
// otherwise only its RF-1 fractional bits below the estimate (the top bits
// were absorbed by V and M). z_o = Zout register of digit z_{j+1}.
module olm_stage
  import olm_pkg::*;
#(
  parameter int N = 8,
  parameter int P = p_calc(N),
  parameter int G = g_calc(N),
  parameter int J = 0,
  // derived sizes, not to be overridden
  localparam int F    = f_v(N, P, G, J),
  localparam int W    = IB + F,
  localparam int FI   = rf(N, P, G, J - 1),
  localparam int WSI  = ws_width(N, P, G, J - 1),
  localparam int WCI  = wc_width(N, P, G, J - 1),
  localparam int WSO  = ws_width(N, P, G, J),
  localparam int WCO  = wc_width(N, P, G, J),
  localparam int LXI  = lx_in(N, P, G, J),
  localparam int LXO  = lx_in(N, P, G, J + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           valid_i,
  input  logic           act_i,   // operation still needs this iteration
  input  sd_digit_t      xd,      // x_{j+4}
  input  sd_digit_t      yd,      // y_{j+4}
  input  logic [WSI-1:0] ws_i,    // 2w[j], sum vector
  input  logic [WCI-1:0] wc_i,    // 2w[j], carry vector
  input  logic [LXI:0]   x_i,     // x[j]
  input  logic [LXI:0]   xm_i,    // x[j] - ulp
  input  logic [LXI:0]   y_i,     // y[j]
  input  logic [LXI:0]   ym_i,    // y[j] - ulp
  output logic           valid_o,
  output logic [WSO-1:0] ws_o,    // 2w[j+1], sum vector
  output logic [WCO-1:0] wc_o,    // 2w[j+1], carry vector
  output logic [LXO:0]   x_o,     // x[j+1]
  output logic [LXO:0]   xm_o,
  output logic [LXO:0]   y_o,     // y[j+1]
  output logic [LXO:0]   ym_o,
  output sd_digit_t      z_o      // Zout: z_{j+1}
);

  localparam bit INPUT  = has_input(N, J);
  localparam bit APPEND = appends(N, P, G, J);
  localparam bit SELECT = (J >= 0);
  localparam int LXN    = APPEND ? LXI + 1 : LXI;  // bits of x[j+1], y[j+1]
  localparam int SHW    = F - FI;                  // residual alignment

  // ---------------- pipeline valid ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

  // ---------------- residual alignment to F fractional bits ----------------
  logic [W-1:0] ws_al, wc_al;
  if (SHW > 0) begin : g_shift
    assign ws_al = {ws_i, {SHW{1'b0}}};
    if (wc_full(J - 1)) begin : g_full
      assign wc_al = {wc_i, {SHW{1'b0}}};
    end else begin : g_low
      assign wc_al = {3'b000, wc_i, {SHW{1'b0}}};
    end
  end else begin : g_noshift
    assign ws_al = ws_i;
    if (wc_full(J - 1)) begin : g_full
      assign wc_al = wc_i;
    end else begin : g_low
      assign wc_al = {3'b000, wc_i};
    end
  end

  // ---------------- v[j] in carry-save form ----------------
  logic [W-1:0] v_s, v_c;
  logic [LXN:0] x_n, xm_n, y_n, ym_n;  // x[j+1], y[j+1] (and companions)

  if (INPUT) begin : g_input
    // CA-REG append
    if (APPEND) begin : g_app
      olm_ca_append #(.L(LXI)) u_cax (.q(x_i), .qm(xm_i), .d(xd), .q_next(x_n), .qm_next(xm_n));
      olm_ca_append #(.L(LXI)) u_cay (.q(y_i), .qm(ym_i), .d(yd), .q_next(y_n), .qm_next(ym_n));
    end else begin : g_noapp
      // digit j+4 lies below the kept precision of the prefixes
      assign x_n  = x_i;
      assign xm_n = xm_i;
      assign y_n  = y_i;
      assign ym_n = ym_i;
    end

    // operands times 2^-3, aligned to F fractional bits, sign-extended
    localparam int SHX = F - LXI - DELTA;
    localparam int SHY = F - LXN - DELTA;
    logic [W-1:0] xa, ya, selx, sely;
    logic         cy_in, cx_in;
    if (SHX > 0) begin : g_shx
      assign xa = {{(DELTA+1){x_i[LXI]}}, x_i, {SHX{1'b0}}};
    end else begin : g_noshx
      assign xa = {{(DELTA+1){x_i[LXI]}}, x_i};
    end
    if (SHY > 0) begin : g_shy
      assign ya = {{(DELTA+1){y_n[LXN]}}, y_n, {SHY{1'b0}}};
    end else begin : g_noshy
      assign ya = {{(DELTA+1){y_n[LXN]}}, y_n};
    end

    // x[j] * y_{j+4}  (carry cy when y_{j+4} < 0)
    olm_selector #(.W(W)) u_selx (.a(xa), .d(yd), .o(selx), .cin(cy_in));
    // y[j+1] * x_{j+4} (carry cx when x_{j+4} < 0)
    olm_selector #(.W(W)) u_sely (.a(ya), .d(xd), .o(sely), .cin(cx_in));

    olm_adder42 #(.W(W)) u_add (
      .a(ws_al), .b(wc_al), .e(selx), .f(sely), .cin0(cy_in), .cin1(cx_in),
      .s(v_s), .c(v_c)
    );
  end else begin : g_noinput
    // last DELTA iterations: input digits are zero, v[j] = 2w[j]
    assign v_s  = ws_al;
    assign v_c  = wc_al;
    assign x_n  = '0;
    assign xm_n = '0;
    assign y_n  = '0;
    assign ym_n = '0;
  end

  // ---------------- selection and next residual ----------------
  logic [WSO-1:0] ws_n;
  logic [WCO-1:0] wc_n;
  sd_digit_t      z_n;

  if (SELECT) begin : g_select
    logic [EST_W-1:0] v_hat;
    logic [2:0]       w_top;
    logic [F:0]       ws2;  // 2w[j+1] sum vector, 2 integer + F-1 fractional bits
    logic [F-3:0]     wc2;  // 2w[j+1] carry vector below the estimate
    olm_v_cpa u_v (.s_top(v_s[W-1-:EST_W]), .c_top(v_c[W-1-:EST_W]), .v_hat(v_hat));
    olm_selm  u_selm (.v3(v_hat[3:1]), .z(z_n));
    olm_m_sub u_m (.v_low(v_hat[2:0]), .z(z_n), .w_top(w_top));
    assign ws2  = {w_top, v_s[F-3:0]};
    assign wc2  = v_c[F-3:0];
    assign ws_n = ws2[F-:WSO];
    assign wc_n = wc2[F-3-:WCO];
  end else begin : g_init
    // initialization: no output digit, w[j+1] = v[j]
    assign z_n  = SD_ZERO;
    assign ws_n = v_s[W-2-:WSO];
    assign wc_n = v_c[W-2-:WCO];
  end

  // ---------------- pipeline registers ----------------
  logic load;
  assign load = valid_i & act_i;

  if (J < N - 1) begin : g_wreg  // REG WS, REG WC
    always_ff @(posedge clk) begin
      if (load) begin
        ws_o <= ws_n;
        wc_o <= wc_n;
      end
    end
  end else begin : g_nowreg
    // the final residual is not needed
    assign ws_o = '0;
    assign wc_o = '0;
  end

  if (has_x_out(N, J)) begin : g_xreg  // CA-REG X / Y
    always_ff @(posedge clk) begin
      if (load) begin
        x_o <= x_n[LXN-:(LXO+1)];
        y_o <= y_n[LXN-:(LXO+1)];
      end
    end
  end else begin : g_noxreg
    assign x_o = '0;
    assign y_o = '0;
  end

  if (has_xm_out(N, P, G, J)) begin : g_xmreg
    always_ff @(posedge clk) begin
      if (load) begin
        xm_o <= xm_n[LXN-:(LXO+1)];
        ym_o <= ym_n[LXN-:(LXO+1)];
      end
    end
  end else begin : g_noxmreg
    assign xm_o = '0;
    assign ym_o = '0;
  end

  if (SELECT) begin : g_zreg  // Zout
    always_ff @(posedge clk) begin
      if (load) z_o <= z_n;
    end
  end else begin : g_nozreg
    assign z_o = SD_ZERO;
  end

endmodule
