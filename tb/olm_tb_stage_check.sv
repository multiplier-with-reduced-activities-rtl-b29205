// olm_tb_stage_check -- drives one olm_stage (size N, iteration J) with
// random, range-respecting inputs and checks its registers against exact
// arithmetic in units of 2^-F:
//   v      = 2w[j] + x[j] y_{j+4} 2^-3 + y[j+1] x_{j+4} 2^-3
//   z      = +1 if v >= 3/4, -1 if v < -1/2, 0 if 0 <= v < 1/2 (either
//            neighbour in the overlap regions), none before j = 0
//   2w[j+1]= 2(v - z), each carry-save vector floored to the register's
//            precision (so the value may be low by less than two units)
//   x[j+1] = x[j] + x_{j+4} 2^-(L+1) floored to the kept bits, and the
//            companion register one unit below it.
// Registers must hold when valid_i is low, and when act_i is low (the
// operation's precision ends before this iteration).
module olm_tb_stage_check
  import olm_pkg::*;
#(
  parameter int N    = 8,
  parameter int J    = 0,
  parameter int NTST = 3000
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int P    = p_calc(N);
  localparam int G    = g_calc(N);
  localparam int F    = f_v(N, P, G, J);
  localparam int FI   = rf(N, P, G, J - 1);
  localparam int RFO  = rf(N, P, G, J);
  localparam int WSI  = ws_width(N, P, G, J - 1);
  localparam int WCI  = wc_width(N, P, G, J - 1);
  localparam int WSO  = ws_width(N, P, G, J);
  localparam int WCO  = wc_width(N, P, G, J);
  localparam int LXI  = lx_in(N, P, G, J);
  localparam int LXO  = lx_in(N, P, G, J + 1);
  localparam bit APP  = appends(N, P, G, J);
  localparam bit INP  = has_input(N, J);

  logic rst_n, valid_i, valid_o, act_i;
  sd_digit_t xd, yd, z_o;
  logic [WSI-1:0] ws_i;
  logic [WCI-1:0] wc_i;
  logic [LXI:0]   x_i, xm_i, y_i, ym_i;
  logic [WSO-1:0] ws_o;
  logic [WCO-1:0] wc_o;
  logic [LXO:0]   x_o, xm_o, y_o, ym_o;

  olm_stage #(.N(N), .P(P), .G(G), .J(J)) dut (.*);

  function automatic longint sx(longint v, int w);  // sign-extend a w-bit field
    longint m = longint'(1) <<< w;
    v = v & (m - 1);
    return (v >= (m >>> 1)) ? v - m : v;
  endfunction

  function automatic int dv(sd_digit_t d);
    return int'(d.pos) - int'(d.neg);
  endfunction

  function automatic sd_digit_t rdig();
    int r = $urandom_range(0, 3);
    return '{pos: r[1], neg: r[0]};
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL stage J=%0d: %s", J, what);
    end
  endtask

  initial begin
    longint w2, wsv, wcv, xv, yv, x1, y1, v, z, exp_w, got_w, d, m4, xo_exp;
    int     zg;
    logic [WSO-1:0] hold_ws;
    logic [LXO:0]   hold_x;
    sd_digit_t      hold_z;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; valid_i = 1'b0; act_i = 1'b1;
    xd = SD_ZERO; yd = SD_ZERO; ws_i = '0; wc_i = '0;
    x_i = '0; xm_i = '1; y_i = '0; ym_i = '1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NTST; t++) begin
      // operand prefixes in (-1,1) with LXI fractional bits
      if (J == -DELTA) begin
        xv = 0; yv = 0;
      end else begin
        xv = longint'($urandom_range(0, (2 << LXI) - 2)) - ((1 << LXI) - 1);
        yv = longint'($urandom_range(0, (2 << LXI) - 2)) - ((1 << LXI) - 1);
      end
      x_i = (LXI+1)'(xv); xm_i = (LXI+1)'(xv - 1);
      y_i = (LXI+1)'(yv); ym_i = (LXI+1)'(yv - 1);
      xd = rdig(); yd = INP ? rdig() : SD_ZERO;
      if (!INP) xd = SD_ZERO;
      // residual 2w[j] in [-3/2, 3/2], units 2^-FI, split into carry-save
      if (J == -DELTA) w2 = 0;
      else w2 = longint'($urandom_range(0, 3 << FI)) - (3 << (FI - 1));
      if (wc_full(J - 1)) begin
        wsv = longint'($urandom_range(0, (4 << FI) - 1));
        if (J == -DELTA) wsv = 0;
        wcv = w2 - wsv;
        ws_i = WSI'(wsv); wc_i = WCI'(wcv);
      end else begin
        wcv = longint'($urandom_range(0, (1 << (FI - 1)) - 1));
        wsv = w2 - wcv;
        ws_i = WSI'(wsv); wc_i = WCI'(wcv);
      end
      valid_i = 1'b1;
      @(negedge clk);
      // expected, units 2^-F
      x1 = APP ? 2 * xv + longint'(dv(xd)) : xv;  // LXN fractional bits
      y1 = APP ? 2 * yv + longint'(dv(yd)) : yv;
      v  = w2 <<< (F - FI);
      if (INP) begin
        v += (xv * dv(yd)) <<< (F - LXI - DELTA);
        v += (y1 * dv(xd)) <<< (F - (APP ? LXI + 1 : LXI) - DELTA);
      end
      chk(valid_o === 1'b1, "valid_o");
      zg = dv(z_o);
      if (J >= 0) begin
        if (v >= (3 <<< (F - 2)))       chk(zg == 1,  $sformatf("z=%0d for v=%0d/2^%0d", zg, v, F));
        else if (v < -(1 <<< (F - 1)))  chk(zg == -1, $sformatf("z=%0d for v=%0d/2^%0d", zg, v, F));
        else if (v >= 0 && v < (1 <<< (F - 1))) chk(zg == 0, $sformatf("z=%0d for v=%0d/2^%0d", zg, v, F));
        else if (v >= 0)                chk(zg >= 0,  $sformatf("z=%0d for v=%0d/2^%0d", zg, v, F));
        else                            chk(zg <= 0,  $sformatf("z=%0d for v=%0d/2^%0d", zg, v, F));
        z = longint'(zg);
      end else begin
        chk(zg == 0, "digit before j=0");
        z = 0;
      end
      // 2w[j+1] = 2(v - z); in units 2^-(F-1) that is v - z*2^F
      if (J < N - 1) begin
        exp_w = v - (z <<< F);                  // units 2^-(F-1)
        got_w = sx(longint'(ws_o), WSO);
        if (wc_full(J)) got_w += sx(longint'(wc_o), WCO);
        else            got_w += longint'(wc_o);
        got_w = got_w <<< (F - 1 - RFO);        // to units 2^-(F-1)
        m4 = longint'(4) <<< (F - 1);
        d  = (exp_w - got_w) % m4;
        if (d < 0) d += m4;
        chk(d < (longint'(2) <<< (F - 1 - RFO)) && (RFO < F - 1 || d == 0),
            $sformatf("2w[j+1] low by %0d units of 2^-%0d", d, F - 1));
      end
      if (has_x_out(N, J)) begin
        automatic int ln = APP ? LXI + 1 : LXI;
        xo_exp = x1 >>> (ln - LXO);
        chk(sx(longint'(x_o), LXO + 1) == xo_exp, "x[j+1]");
        chk(sx(longint'(y_o), LXO + 1) == (y1 >>> (ln - LXO)), "y[j+1]");
        if (has_xm_out(N, P, G, J)) begin
          chk(sx(longint'(xm_o), LXO + 1) == xo_exp - 1, "x[j+1]-ulp");
          chk(sx(longint'(ym_o), LXO + 1) == (y1 >>> (ln - LXO)) - 1, "y[j+1]-ulp");
        end
      end
      // every 16th test: a bubble must leave the registers unchanged;
      // every 16th+8: a valid operation with act_i low must do the same
      if (t % 16 == 7) begin
        hold_ws = ws_o; hold_x = x_o; hold_z = z_o;
        act_i = 1'b0;
        ws_i = ~ws_i; x_i = ~x_i; y_i = ~y_i; xd = rdig(); yd = rdig();
        @(negedge clk);
        act_i = 1'b1;
        chk(valid_o === 1'b1, "valid_o with act_i low");
        chk(ws_o == hold_ws && x_o == hold_x && z_o == hold_z, "registers changed with act_i low");
      end
      if (t % 16 == 15) begin
        hold_ws = ws_o; hold_x = x_o; hold_z = z_o;
        valid_i = 1'b0;
        ws_i = ~ws_i; x_i = ~x_i; y_i = ~y_i; xd = rdig(); yd = rdig();
        @(negedge clk);
        chk(valid_o === 1'b0, "valid_o after bubble");
        chk(ws_o == hold_ws && x_o == hold_x && z_o == hold_z, "registers changed during bubble");
      end
    end
    done = 1'b1;
  end
endmodule
