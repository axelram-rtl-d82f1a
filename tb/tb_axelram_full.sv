// tb_axelram_full: the paper's workload on the macro at its default size (d = 128, b = 3,
// T = 4096 keys, 36 layers), with no parameter overrides.
//
// One complete attention-score operation: all 4096 keys of one head are written through the
// write path, one query is loaded (rotation plus table generation), and the scores of all
// 4096 keys are streamed out. Every score is compared with a real-arithmetic reference of the
// paper's equation, ||k|| * sum_i (H s q)_i * c[idx_i] / d, with a one-index-step tolerance
// for keys that have a coordinate close to a quantizer boundary, and the overall error
// against the exact <q, k> is checked. The testbench also counts the multiplications the read
// side performs (d * 2^b table products plus one per key: 5,120) against the T * d = 524,288 of
// a conventional dequantizing datapath, and checks that the scores stream one per cycle.
module tb_axelram_full;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = D_DEF;
  localparam int B = B_DEF;
  localparam int T = T_DEF;
  localparam int L = LAYERS_DEF;
  localparam int SEED = 1;
  localparam int AW = $clog2(T);
  localparam int LW = $clog2(L);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, op_done, query_loaded, score_valid;
  op_e cmd_op = OP_WRITE_KEY;
  logic [LW-1:0] cmd_layer = 0, sign_ld_layer = 0;
  logic [AW-1:0] cmd_addr = 0, score_addr;
  logic [AW:0] cmd_count = 0;
  fp16_t [D-1:0] cmd_vec = '0;
  fp16_t score;
  logic sign_ld_en = 0;
  logic [D-1:0] sign_ld_data = '0;

  axelram_macro dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- reference model
  real c_std [8] = '{-2.1519, -1.3439, -0.7560, -0.2451, 0.2451, 0.7560, 1.3439, 2.1519};
  real b_std [7] = '{-1.7479, -1.0500, -0.5005, 0.0, 0.5005, 1.0500, 1.7479};
  logic [D-1:0] signs [L];
  int   kidx  [T][D];
  real  knorm [T];
  real  kvec  [T][D];
  bit   kamb  [T];
  real  qrot  [D];
  real  qvec  [D];

  function automatic logic [D-1:0] xorshift_signs(int unsigned seed, int unsigned layer);
    bit [31:0] st;
    logic [D-1:0] v;
    st = seed ^ (32'h9e3779b9 * (layer + 1));
    if (st == 0) st = 1;
    for (int i = 0; i < D; i++) begin
      st ^= st << 13;
      st ^= st >> 17;
      st ^= st << 5;
      v[i] = st[31];
    end
    return v;
  endfunction

  // y = H_d * diag(s) * x with H[r][c] = (-1)^popcount(r & c)
  task automatic hadamard(input real x [D], input logic [D-1:0] s, output real y [D]);
    for (int r = 0; r < D; r++) begin
      y[r] = 0.0;
      for (int c = 0; c < D; c++)
        y[r] += (($countones(r & c) % 2 == 1) != s[c] ? -1.0 : 1.0) * x[c];
    end
  endtask

  // ---------------------------------------------------------------- expected scores
  typedef struct { int addr; real val; real tol; real truth; real scale; } exp_t;
  exp_t expq [$];
  int n_scores = 0, n_gaps = 0, sum_err_n = 0;
  real sum_err = 0.0;
  int last_score_cyc = -1;
  int acc_cyc = -1, lat_first = -1;   // latency from an accepted OP_SCORE to its first score
  bit lat_armed = 0;

  always @(posedge clk) begin
    if (rst_n && cmd_valid && cmd_ready && cmd_op == OP_SCORE && cmd_count != 0 && !lat_armed
        && lat_first < 0) begin
      acc_cyc = cyc;
      lat_armed = 1;
    end
    if (rst_n && score_valid && lat_armed) begin
      lat_first = cyc - acc_cyc;
      lat_armed = 0;
    end
    if (rst_n && score_valid) begin
      exp_t e;
      real got;
      if (expq.size() == 0) begin
        check(0, "unexpected score");
      end else begin
        e = expq.pop_front();
        got = fp16_to_real(score);
        check(int'(score_addr) == e.addr, $sformatf("score addr %0d want %0d", score_addr, e.addr));
        check(near(got, e.val, 0.0, e.tol),
              $sformatf("key %0d score %f want %f (tol %f)", e.addr, got, e.val, e.tol));
        sum_err += (got - e.truth) * (got - e.truth) / (e.scale * e.scale);
        sum_err_n++;
      end
      if (last_score_cyc >= 0 && cyc != last_score_cyc + 1 && expq.size() > 0) n_gaps++;
      last_score_cyc = cyc;
      n_scores++;
    end
  end

  // ---------------------------------------------------------------- command driver
  int n_stall = 0;
  always @(posedge clk) if (rst_n && cmd_valid && !cmd_ready) n_stall++;

  task automatic send(op_e op, int layer, int addr, int count, fp16_t [D-1:0] v);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_layer = LW'(layer); cmd_addr = AW'(addr);
    cmd_count = (AW+1)'(count); cmd_vec = v;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1;
    cmd_valid = 0;
  endtask

  int n_write = 0, n_query = 0, n_sign_load = 0, n_wrap = 0, n_empty = 0;
  bit layers_used [L];

  task automatic write_key(int layer, int addr, real scale);
    fp16_t [D-1:0] v;
    real u [D];
    real y [D];
    real n, dmin;
    n = 0.0;
    for (int i = 0; i < D; i++) begin
      v[i] = real_to_fp16(gauss() * scale * (i == 0 ? 4.0 : 1.0));
      kvec[addr][i] = fp16_to_real(v[i]);
      n += kvec[addr][i] * kvec[addr][i];
    end
    n = $sqrt(n);
    knorm[addr] = n;
    for (int i = 0; i < D; i++) u[i] = kvec[addr][i] / n;
    hadamard(u, signs[layer], y);
    kamb[addr] = 0;
    for (int i = 0; i < D; i++) begin
      kidx[addr][i] = 0;
      for (int k = 0; k < 7; k++) begin
        if (y[i] > b_std[k]) kidx[addr][i]++;
        dmin = y[i] - b_std[k];
        if (dmin < 0.0) dmin = -dmin;
        if (dmin < 0.03) kamb[addr] = 1;
      end
    end
    send(OP_WRITE_KEY, layer, addr, 0, v);
    n_write++;
    layers_used[layer] = 1;
  endtask

  task automatic load_query(int layer, real scale);
    fp16_t [D-1:0] v;
    real x [D];
    for (int i = 0; i < D; i++) begin
      v[i] = real_to_fp16(gauss() * scale);
      x[i] = fp16_to_real(v[i]);
      qvec[i] = x[i];
    end
    hadamard(x, signs[layer], qrot);
    send(OP_QUERY, layer, 0, 0, v);
    n_query++;
    layers_used[layer] = 1;
  endtask

  task automatic score_run(int addr, int count);
    fp16_t [D-1:0] v;
    v = '0;
    for (int k = 0; k < count; k++) begin
      exp_t e;
      int a;
      real s, umax, qn, tr;
      a = (addr + k) % T;
      s = 0.0; umax = 0.0; qn = 0.0; tr = 0.0;
      for (int i = 0; i < D; i++) begin
        s += qrot[i] * c_std[kidx[a][i]];
        if (qrot[i] > umax) umax = qrot[i];
        if (-qrot[i] > umax) umax = -qrot[i];
        qn += qvec[i] * qvec[i];
        tr += qvec[i] * kvec[a][i];
      end
      e.addr  = a;
      e.val   = s * knorm[a] / D;
      e.truth = tr;
      e.scale = $sqrt(qn) * knorm[a];
      e.tol   = 0.004 * e.scale + 0.002 * (e.val < 0 ? -e.val : e.val);
      if (kamb[a]) e.tol += 0.9 * umax * knorm[a] / D;
      expq.push_back(e);
    end
    if (addr + count > T) n_wrap++;
    if (count == 0) n_empty++;
    send(OP_SCORE, 0, addr, count, v);
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    while (expq.size() != 0) @(posedge clk);
  endtask

  // multiplications on the read side: table products and norm products
  longint n_mult = 0;
  always @(posedge clk) begin
    if (rst_n && dut.tg_we) n_mult += D;
    if (rst_n && score_valid) n_mult += 1;
  end

  // ---------------------------------------------------------------- sequence
  initial begin
    longint conv;
    for (int l = 0; l < L; l++) signs[l] = xorshift_signs(SEED, l);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < T; a++) write_key(5, a, (a % 4 == 0) ? 2.0 : 0.5);
    load_query(5, 1.0);
    wait_idle();
    check(query_loaded, "query loaded");
    n_mult = 0;
    // the table product count is for one query: count it again from a fresh query
    load_query(5, 1.0);
    score_run(0, T);
    wait_idle();
    repeat (3) @(posedge clk);
    conv = longint'(T) * D;
    $display("scores=%0d multiplications=%0d conventional=%0d reduction=%0.1fx rms_err=%f",
             n_scores, n_mult, conv, real'(conv) / real'(n_mult), $sqrt(sum_err / sum_err_n));
    check(n_scores == T, "one score per key");
    check(n_mult == longint'(D) * (1 << B) + T, "multiplication count d*2^b + T");
    check(lat_first == $clog2(D) + 4, $sformatf("first score %0d cycles after accept", lat_first));
    check(n_gaps == 0, "scores stream one per cycle");
    check(sum_err_n > 0 && $sqrt(sum_err / sum_err_n) < 0.1, "estimate close to exact <q,k>");
    check(expq.size() == 0, "all expected scores seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
