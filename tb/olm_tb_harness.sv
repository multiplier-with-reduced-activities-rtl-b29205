// olm_tb_harness -- stimulus and checker for one olm_mult_top instance.
//
// Drives signed-digit operand pairs and checks every product independently
// of the design's internals: with X, Y, Z the integer values of the digit
// vectors (sum of d_i 2^(N-i)), a correct N-digit online product satisfies
// |X*Y - Z*2^N| < 2^N, i.e. an error below one unit in the last place.
// Random operations ask for a reduced precision m < N in about one case of
// five (prec_in); their product must have zeros beyond digit m, no stream
// valid beyond m, and |X*Y - Z*2^N| < 2^(2N-m) + 2^N, i.e. an error below
// 2^-m + 2^-N. prec_in = 0 must act as N.
// It also checks the latency (N+4 cycles to z_out), the most significant
// digit first stream z_msdf (digit i in cycle c+i+4, equal to the final
// digit), and the cycle count of a burst of K back-to-back operations,
// (N+DELTA+1)+(K-1). Phases: directed extreme operands, the burst, then
// random operands with random bubbles. Counts the mechanisms exercised:
// negative digits on either operand (complement paths), each selected
// digit value, the (1,1) zero code on inputs, bubbles and back-to-back
// issue; a mechanism never seen counts as a failure.
module olm_tb_harness
  import olm_pkg::*;
#(
  parameter int N     = 8,
  parameter int NOPS  = 2000,  // random operations
  parameter int K     = 8,     // burst length
  parameter int SEED  = 1
) (
  input  logic              clk,
  output logic              rst_n,
  output logic              in_valid,
  output sd_digit_t [N-1:0] x_in,
  output sd_digit_t [N-1:0] y_in,
  output logic [$clog2(N+1)-1:0] prec_in,
  input  logic              out_valid,
  input  sd_digit_t [N-1:0] z_out,
  input  sd_digit_t [N-1:0] z_msdf,
  input  logic      [N-1:0] z_msdf_valid,
  output logic              done,
  output int                checks,
  output int                failures,
  output int                burst_cycles
);
  localparam int LAT   = N + DELTA + 1;
  localparam int MAXOP = NOPS + K + 64;
  localparam int MAXCY = 4 * MAXOP + 4 * LAT + 100;

  typedef logic signed [127:0] big_t;

  big_t      opx[MAXOP], opy[MAXOP];
  int        op_cycle[MAXOP];
  int        op_prec[MAXOP];
  sd_digit_t msdf_dig[MAXOP][N];
  int        op_at_cycle[MAXCY];
  int        n_issued, n_done, cyc;
  int        cnt_negx, cnt_negy, cnt_zpos, cnt_zneg, cnt_zzero, cnt_code11, cnt_bubble, cnt_b2b, cnt_short, cnt_prec0;
  int        burst_first, burst_last_out;
  logic      prev_valid;

  function automatic int dval(sd_digit_t d);
    return int'(d.pos) - int'(d.neg);
  endfunction

  function automatic big_t vec_val(sd_digit_t [N-1:0] v);
    big_t acc = 0;
    for (int i = 0; i < N; i++) acc = acc * 2 + big_t'(dval(v[i]));
    return acc;
  endfunction

  function automatic sd_digit_t rand_digit();
    int r = $urandom_range(0, 6);
    case (r)
      0, 1:    return '{pos: 1'b1, neg: 1'b0};
      2, 3:    return '{pos: 1'b0, neg: 1'b1};
      4:       return '{pos: 1'b1, neg: 1'b1};  // zero, alternative code
      default: return '{pos: 1'b0, neg: 1'b0};
    endcase
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cyc, what);
    end
  endtask

  // issue one operation in the current cycle (called at negedge)
  task automatic issue(input sd_digit_t [N-1:0] xv, input sd_digit_t [N-1:0] yv, input int m);
    in_valid = 1'b1;
    prec_in  = ($clog2(N+1))'(m);
    op_prec[n_issued] = (m == 0) ? N : m;
    if (m == 0) cnt_prec0++;
    if (m != 0 && m < N) cnt_short++;
    x_in     = xv;
    y_in     = yv;
    opx[n_issued]      = vec_val(xv);
    opy[n_issued]      = vec_val(yv);
    op_cycle[n_issued] = cyc;
    op_at_cycle[cyc]   = n_issued;
    for (int i = 0; i < N; i++) begin
      if (dval(xv[i]) < 0) cnt_negx++;
      if (dval(yv[i]) < 0) cnt_negy++;
      if (xv[i].pos && xv[i].neg) cnt_code11++;
      if (yv[i].pos && yv[i].neg) cnt_code11++;
    end
    if (prev_valid) cnt_b2b++;
    n_issued++;
  endtask

  task automatic idle();
    in_valid = 1'b0;
    prec_in  = ($clog2(N+1))'($urandom_range(0, N));
    for (int i = 0; i < N; i++) begin
      x_in[i] = rand_digit();  // garbage on idle cycles must be ignored
      y_in[i] = rand_digit();
    end
  endtask

  // ---------------- output side, sampled at negedge before driving ----------------
  task automatic sample();
    int   id, c;
    big_t z, err, ulp;
    // online digit stream
    for (int i = 1; i <= N; i++) begin
      c = cyc - i - DELTA - 1;
      if (c >= 0 && op_at_cycle[c] >= 0 && i <= op_prec[op_at_cycle[c]]) begin
        check(z_msdf_valid[i-1] === 1'b1, $sformatf("z_msdf_valid[%0d] missing", i-1));
        msdf_dig[op_at_cycle[c]][i-1] = z_msdf[i-1];
      end else if (c >= 0 && op_at_cycle[c] >= 0) begin
        check(z_msdf_valid[i-1] === 1'b0, $sformatf("z_msdf_valid[%0d] beyond precision", i-1));
        msdf_dig[op_at_cycle[c]][i-1] = SD_ZERO;
      end else begin
        check(z_msdf_valid[i-1] === 1'b0, $sformatf("spurious z_msdf_valid[%0d]", i-1));
      end
    end
    c = cyc - LAT;
    if (c >= 0 && op_at_cycle[c] >= 0) begin
      id = op_at_cycle[c];
      check(out_valid === 1'b1, $sformatf("out_valid missing for op %0d (latency %0d)", id, LAT));
      z   = vec_val(z_out);
      ulp = big_t'(1) <<< N;
      err = opx[id] * opy[id] - z * ulp;
      if (err < 0) err = -err;
      if (op_prec[id] == N)
        check(err < ulp, $sformatf("op %0d: x=%0d y=%0d z=%0d |err|=%0d (ulp %0d)",
                                   id, opx[id], opy[id], z, err, ulp));
      else
        check(err < (big_t'(1) <<< (2 * N - op_prec[id])) + ulp,
              $sformatf("op %0d (%0d digits): x=%0d y=%0d z=%0d |err|=%0d", id, op_prec[id], opx[id], opy[id], z, err));
      for (int i = 0; i < N; i++) begin
        check(z_out[i] == msdf_dig[id][i], $sformatf("op %0d digit %0d: z_out differs from stream", id, i+1));
        if (i >= op_prec[id]) check(z_out[i] == SD_ZERO, $sformatf("op %0d digit %0d beyond precision not 0", id, i+1));
        case (dval(z_out[i]))
          1:       cnt_zpos++;
          -1:      cnt_zneg++;
          default: cnt_zzero++;
        endcase
      end
      if (id == burst_first + K - 1) burst_last_out = cyc;
      n_done++;
    end else begin
      check(out_valid === 1'b0, "spurious out_valid");
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    sd_digit_t [N-1:0] a, b;
    void'($urandom(SEED));
    checks = 0; failures = 0; done = 1'b0; burst_cycles = 0;
    n_issued = 0; n_done = 0; cyc = 0; prev_valid = 1'b0;
    cnt_negx = 0; cnt_negy = 0; cnt_zpos = 0; cnt_zneg = 0; cnt_zzero = 0;
    cnt_code11 = 0; cnt_bubble = 0; cnt_b2b = 0; cnt_short = 0; cnt_prec0 = 0; burst_first = -1; burst_last_out = -1;
    for (int i = 0; i < MAXCY; i++) op_at_cycle[i] = -1;
    rst_n = 1'b0;
    idle();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // directed operands: extremes of both signs, zero, single digits
    for (int t = 0; t < 8; t++) begin
      for (int i = 0; i < N; i++) begin
        case (t)
          0: begin a[i] = '{1'b1, 1'b0}; b[i] = '{1'b1, 1'b0}; end
          1: begin a[i] = '{1'b0, 1'b1}; b[i] = '{1'b0, 1'b1}; end
          2: begin a[i] = '{1'b1, 1'b0}; b[i] = '{1'b0, 1'b1}; end
          3: begin a[i] = '{1'b0, 1'b0}; b[i] = '{1'b1, 1'b0}; end
          4: begin a[i] = (i == 0) ? '{1'b1, 1'b0} : '{1'b0, 1'b1}; b[i] = a[i]; end
          5: begin a[i] = (i == N-1) ? '{1'b1, 1'b0} : '{1'b0, 1'b0}; b[i] = a[i]; end
          6: begin a[i] = (i % 2 == 1) ? '{1'b1, 1'b0} : '{1'b0, 1'b1}; b[i] = '{1'b1, 1'b0}; end
          default: begin a[i] = '{1'b1, 1'b0}; b[i] = (i == 0) ? '{1'b1, 1'b0} : '{1'b0, 1'b1}; end
        endcase
      end
      sample(); issue(a, b, N); prev_valid = 1'b1;
      @(negedge clk);
    end
    // drain, then the burst of K back-to-back operations into an empty pipeline
    repeat (LAT + 2) begin sample(); idle(); prev_valid = 1'b0; @(negedge clk); end
    burst_first = n_issued;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < N; i++) begin a[i] = rand_digit(); b[i] = rand_digit(); end
      sample(); issue(a, b, (k == 3) ? 0 : N); prev_valid = 1'b1;
      if (k == 0) burst_cycles = cyc;
      @(negedge clk);
    end
    // random stream with bubbles
    for (int k = 0; k < NOPS; ) begin
      sample();
      if ($urandom_range(0, 3) != 0) begin
        for (int i = 0; i < N; i++) begin a[i] = rand_digit(); b[i] = rand_digit(); end
        issue(a, b, ($urandom_range(0, 4) == 0) ? $urandom_range(1, N - 1) : N); prev_valid = 1'b1; k++;
      end else begin
        idle(); prev_valid = 1'b0; cnt_bubble++;
      end
      @(negedge clk);
    end
    repeat (LAT + 3) begin sample(); idle(); prev_valid = 1'b0; @(negedge clk); end
    // summary checks
    check(n_done == n_issued, $sformatf("completed %0d of %0d operations", n_done, n_issued));
    burst_cycles = burst_last_out - burst_cycles;  // first input to last output
    check(burst_cycles == LAT + K - 1,
          $sformatf("burst of %0d took %0d cycles, expected %0d", K, burst_cycles, LAT + K - 1));
    check(cnt_negx > 0,   "no negative x digit issued");
    check(cnt_negy > 0,   "no negative y digit issued");
    check(cnt_zpos > 0,   "SELM never selected +1");
    check(cnt_zneg > 0,   "SELM never selected -1");
    check(cnt_zzero > 0,  "SELM never selected 0");
    check(cnt_code11 > 0, "(1,1) zero code never issued");
    check(cnt_bubble > 0, "no pipeline bubble");
    check(cnt_b2b > 0,    "no back-to-back issue");
    check(cnt_short > 0,  "no reduced-precision operation");
    check(cnt_prec0 > 0,  "prec_in = 0 never used");
    $display("N=%0d ops=%0d burst K=%0d cycles=%0d | neg x digits=%0d neg y digits=%0d z+1=%0d z0=%0d z-1=%0d code11=%0d bubbles=%0d back-to-back=%0d reduced-precision=%0d",
             N, n_done, K, burst_cycles, cnt_negx, cnt_negy, cnt_zpos, cnt_zzero, cnt_zneg,
             cnt_code11, cnt_bubble, cnt_b2b, cnt_short);
    done = 1'b1;
  end

  always @(posedge clk) cyc <= cyc + 1;

endmodule
