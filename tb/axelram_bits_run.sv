// axelram_bits_run: one end-to-end run of the macro at bit-width B (helper of
// tb_axelram_bitwidths). It writes T keys, loads two queries and streams every key's score,
// comparing each with a real-arithmetic reference of ||k|| * sum_i (H s q)_i * c[idx_i] / d
// that uses the published Lloyd-Max table for B bits. It reports its check and failure counts
// on its ports and raises finished when done.
module axelram_bits_run
  import axelram_pkg::*;
  import fp16_ref_pkg::*;
#(
  parameter int B = 2
) (
  output bit finished,
  output int checks,
  output int failures
);
  localparam int D = 32;
  localparam int T = 32;
  localparam int L = 2;
  localparam int SEED = 5;
  localparam int AW = $clog2(T);
  localparam int LW = $clog2(L);
  localparam int NC = 1 << B;

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

  axelram_macro #(.D(D), .B(B), .T(T), .LAYERS(L), .SIGN_SEED(SEED)) dut (.*);
  initial begin finished = 0; checks = 0; failures = 0; end

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc++;


  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- reference model
  // published Lloyd-Max levels of N(0,1)
  real c2 [4]  = '{-1.5104, -0.4528, 0.4528, 1.5104};
  real b2 [3]  = '{-0.9816, 0.0, 0.9816};
  real c4 [16] = '{-2.7326, -2.0690, -1.6180, -1.2562, -0.9423, -0.6568, -0.3880, -0.1284,
                   0.1284, 0.3880, 0.6568, 0.9423, 1.2562, 1.6180, 2.0690, 2.7326};
  real b4 [15] = '{-2.4008, -1.8435, -1.4371, -1.0993, -0.7995, -0.5224, -0.2582, 0.0,
                   0.2582, 0.5224, 0.7995, 1.0993, 1.4371, 1.8435, 2.4008};
  real c_std [NC];
  real b_std [NC-1];
  initial begin
    for (int j = 0; j < NC; j++) c_std[j] = (B == 2) ? c2[j] : c4[j];
    for (int j = 0; j < NC - 1; j++) b_std[j] = (B == 2) ? b2[j] : b4[j];
  end
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
      for (int k = 0; k < NC - 1; k++) begin
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

  // ---------------------------------------------------------------- sequence
  initial begin
    for (int l = 0; l < L; l++) signs[l] = xorshift_signs(SEED, l);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < T; a++) write_key(1, a, 1.0);
    load_query(1, 1.0);
    score_run(0, T);
    load_query(1, 0.5);
    score_run(0, T);
    wait_idle();
    repeat (5) @(posedge clk);
    check(expq.size() == 0 && n_scores == 2 * T, "all scores seen");
    $display("B=%0d: scores=%0d RMS normalised error %f", B, n_scores, $sqrt(sum_err / sum_err_n));
    check($sqrt(sum_err / sum_err_n) < (B == 2 ? 0.25 : 0.1), "estimate close to exact <q,k>");
    finished = 1;
  end
endmodule
