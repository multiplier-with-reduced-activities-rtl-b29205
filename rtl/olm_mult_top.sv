// olm_mult_top -- pipelined radix-2 online multiplier with reduced working
// precision, for streams of operand pairs (inner-product arrays).
//
// Operands and product are n-digit signed-digit fractions, digit i of
// weight 2^-i, digits in {-1,0,1} given as (pos,neg) bit pairs. The n+DELTA
// iterations of the online recurrence are unrolled into n+DELTA pipeline
// stages (olm_stage), so a new operand pair can enter every clock cycle.
// Stage j uses operand digit j+DELTA+1 and, from j = 0 on, emits product
// digit j+1, most significant first.
//
// Interface and timing: present x_in/y_in with in_valid high in cycle c.
//   * z_msdf[i-1] carries product digit z_i of that operation in cycle
//     c+i+DELTA+1 (flagged by z_msdf_valid[i-1]): the online, most
//     significant digit first stream a following online operator can start
//     on, or cut short for a lower precision.
//   * z_out carries the whole product in cycle c+N+DELTA+1 with out_valid.
// Throughput one operation per cycle: k operations take (N+DELTA+1)+(k-1)
// cycles.
// Variable precision: prec_in = m (1..N; 0 or more than N mean N) asks for
// only m product digits. The precision travels with the operation; stages
// j >= m do not load for it (its iterations are simply stopped), product
// digits beyond m read as 0 and their z_msdf_valid stays low. out_valid
// keeps the fixed latency; the m digits are final on z_msdf from cycle
// c+m+DELTA+1. Then |x*y - z| < 2^-m + 2^-N. Bubbles (in_valid low) are allowed and freeze the stage registers
// they pass through.
// Operand digit i is delivered to its stage through an i-stage shift
// register, and product digit i is delayed N-i cycles to form z_out; these
// skew and deskew registers are this design's own interface choice (the
// online stream itself needs only the stage registers).
// Result accuracy: |x*y - z| < 2^-N (the truncated working precision keeps
// the error below one unit in the last digit).
module olm_mult_top
  import olm_pkg::*;
#(
  parameter int N = 8,          // operand and product digits (n)
  parameter int P = p_calc(N),  // reduced working precision p
  parameter int G = g_calc(N),   // guard bits of the tail schedule
  localparam int PW = $clog2(N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  sd_digit_t [N-1:0]    x_in,          // x_in[i-1] = x_i
  input  sd_digit_t [N-1:0]    y_in,          // y_in[i-1] = y_i
  input  logic [PW-1:0]        prec_in,       // product digits wanted, 1..N (0: N)
  output logic                 out_valid,
  output sd_digit_t [N-1:0]    z_out,         // z_out[i-1] = z_i
  output sd_digit_t [N-1:0]    z_msdf,        // online product digit stream
  output logic      [N-1:0]    z_msdf_valid
);
  localparam int NS = N + DELTA;  // number of stages

  // ---------------- input capture and skew ----------------
  logic valid_in_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_in_q <= 1'b0;
    else        valid_in_q <= in_valid;
  end

  // precision of each operation, carried down the pipeline with it
  logic [PW-1:0] prec_q[NS+1];  // prec_q[s]: operation entering stage s
  always_ff @(posedge clk) begin
    if (in_valid) prec_q[0] <= (prec_in == '0 || int'(prec_in) > N) ? PW'(N) : prec_in;
  end

  sd_digit_t [N-1:0] xs, ys;  // digit i, delayed i cycles to meet stage i-1
  for (genvar i = 1; i <= N; i++) begin : g_skew
    olm_delay_line #(.W(4), .D(i)) u_dl (
      .clk(clk), .d({x_in[i-1], y_in[i-1]}), .q({xs[i-1], ys[i-1]})
    );
  end

  // ---------------- stages j = -DELTA .. N-1 ----------------
  for (genvar s = 0; s < NS; s++) begin : g_st
    localparam int J = s - DELTA;
    logic [ws_width(N, P, G, J-1)-1:0] ws_i;
    logic [wc_width(N, P, G, J-1)-1:0] wc_i;
    logic [lx_in(N, P, G, J):0]        x_i, xm_i, y_i, ym_i;
    logic [ws_width(N, P, G, J)-1:0]   ws_o;
    logic [wc_width(N, P, G, J)-1:0]   wc_o;
    logic [lx_in(N, P, G, J+1):0]      x_o, xm_o, y_o, ym_o;
    logic                              valid_i, valid_o, act;
    sd_digit_t                         xd, yd, z_o;

    if (s == 0) begin : g_first
      // x[-3] = y[-3] = w[-3] = 0; the companions are 0 - 1 = -1
      assign valid_i = valid_in_q;
      assign ws_i    = '0;
      assign wc_i    = '0;
      assign x_i     = '0;
      assign y_i     = '0;
      assign xm_i    = '1;
      assign ym_i    = '1;
    end else begin : g_next
      assign valid_i = g_st[s-1].valid_o;
      assign ws_i    = g_st[s-1].ws_o;
      assign wc_i    = g_st[s-1].wc_o;
      assign x_i     = g_st[s-1].x_o;
      assign xm_i    = g_st[s-1].xm_o;
      assign y_i     = g_st[s-1].y_o;
      assign ym_i    = g_st[s-1].ym_o;
    end

    if (s < N) begin : g_dig
      assign xd = xs[s];  // x_{j+4} = x_{s+1}
      assign yd = ys[s];
    end else begin : g_nodig
      assign xd = SD_ZERO;
      assign yd = SD_ZERO;
    end

    // iteration j produces digit j+1: skip it when fewer digits are wanted
    assign act = (J < 0) || (J < int'(prec_q[s]));
    always_ff @(posedge clk) begin
      if (valid_i) prec_q[s+1] <= prec_q[s];
    end

    olm_stage #(.N(N), .P(P), .G(G), .J(J)) u_stage (
      .clk(clk), .rst_n(rst_n), .valid_i(valid_i), .act_i(act), .xd(xd), .yd(yd),
      .ws_i(ws_i), .wc_i(wc_i), .x_i(x_i), .xm_i(xm_i), .y_i(y_i), .ym_i(ym_i),
      .valid_o(valid_o), .ws_o(ws_o), .wc_o(wc_o),
      .x_o(x_o), .xm_o(xm_o), .y_o(y_o), .ym_o(ym_o), .z_o(z_o)
    );
  end

  // ---------------- product digits ----------------
  for (genvar i = 1; i <= N; i++) begin : g_out
    // z_i comes from stage j = i-1, i.e. s = i-1+DELTA; its precision
    // register is prec_q[s+1]
    logic      live;
    sd_digit_t zd;
    assign live                = i <= int'(prec_q[i+DELTA]);
    assign z_msdf[i-1]         = live ? g_st[i-1+DELTA].z_o : SD_ZERO;
    assign z_msdf_valid[i-1]   = g_st[i-1+DELTA].valid_o & live;
    olm_delay_line #(.W(2), .D(N-i)) u_dq (
      .clk(clk), .d(z_msdf[i-1]), .q(zd)
    );
    assign z_out[i-1] = zd;
  end
  assign out_valid = g_st[NS-1].valid_o;

  // SELM never emits the (1,1) code
  always_ff @(posedge clk) begin
    if (out_valid) begin
      for (int i = 0; i < N; i++)
        assert (!(z_out[i].pos && z_out[i].neg)) else $error("invalid product digit code");
    end
  end

endmodule
