// tb_npe -- self-checking testbench of the nonlinear processing engine
// (reduced size: 8 lanes, 8-row blocks).
// Runs every operation the way the fused dataflows use them and compares the
// FP16 outputs with real-valued reference formulas computed here:
//   RMS_STAT over 4 tiles, then RMS_NORM of only the unskipped rows (bitmask)
//   in both the mean/variance form and the plain RMS form; SM_STAT over 4
//   tiles with the online max/sum update, then SM_NORM = true row softmax;
//   SWIGLU; ROPE with cos/sin at the bitmask-selected token positions.
// Tolerance: 3 % relative plus 0.01 absolute (fixed-point internals, a
// polynomial exponent and FP16 truncation).  The 3-clock latency is checked.
`timescale 1ns/1ps
module tb_npe;
  import skipopu_pkg::*;
  localparam int LANES = 8, MAX_ROWS = 8, GW = 4, RP = 32, RC = 2, T = 4;
  localparam int D = LANES * T;
  logic clk = 0, rst_n = 0;
  npe_op_e op;
  logic first_round, last_round, rms_center;
  fix_t inv_d, inv_sqrt_dk, eps;
  logic [MAX_ROWS-1:0] bitmask;
  logic [15:0] pos_base;
  logic in_valid = 0;
  logic [$clog2(MAX_ROWS)-1:0] in_row, out_row;
  logic [$clog2(GW)-1:0] in_col, gamma_addr;
  fp16_t in_a [LANES], in_b [LANES], out [LANES], gamma_data [LANES];
  logic out_valid, feat_done, gamma_we = 0, rot_we = 0;
  logic [$clog2(RP)-1:0] rot_pos;
  logic [$clog2(RC)-1:0] rot_chunk;
  fp16_t rot_cos [LANES/2], rot_sin [LANES/2];
  int checks = 0, failures = 0;

  npe #(.LANES(LANES), .MAX_ROWS(MAX_ROWS), .GAMMA_WORDS(GW), .ROT_POS(RP), .ROT_CHUNKS(RC)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(input int lo, input int hi);
    int v; v = $urandom_range(lo, hi); return v;
  endfunction
  function automatic real p2(input int e);
    real r; r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0; else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction
  function automatic real f2r(input fp16_t f);
    real m;
    if (f[14:10] == 0) return 0.0;
    m = (1024.0 + f[9:0]) / 1024.0 * p2(int'(f[14:10]) - 15);
    return f[15] ? -m : m;
  endfunction
  function automatic fp16_t r2f(input real v);
    real a; int e; int m;
    if (v == 0.0) return 16'h0;
    a = v < 0 ? -v : v; e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0 - 0.5);
    if (m < 0) m = 0;
    return {v < 0, 5'(e + 15), 10'(m)};
  endfunction
  function automatic fix_t r2x(input real v); return fix_t'(longint'(v * 65536.0)); endfunction

  task automatic chk(input real got, input real exp_v, input string what);
    real d, tol;
    d = got - exp_v; if (d < 0) d = -d;
    tol = 0.03 * (exp_v < 0 ? -exp_v : exp_v) + 0.01;
    checks++;
    if (d > tol) begin
      failures++;
      if (failures < 15) $display("%s: got %f exp %f", what, got, exp_v);
    end
  endtask

  real X [MAX_ROWS][D];
  real G [D];
  real expq [$];
  int  lat_start, lat_seen;

  always @(posedge clk) if (out_valid) begin
    for (int l = 0; l < LANES; l++) chk(f2r(out[l]), expq.pop_front(), $sformatf("op%0d row%0d lane%0d", op, out_row, l));
  end

  task automatic send_row(input int r, input int col, input real a [LANES], input real b [LANES]);
    in_row = r[$clog2(MAX_ROWS)-1:0]; in_col = col[$clog2(GW)-1:0];
    for (int l = 0; l < LANES; l++) begin in_a[l] = r2f(a[l]); in_b[l] = r2f(b[l]); end
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic stat_pass(input npe_op_e o);
    real a [LANES], b [LANES];
    op = o;
    for (int k = 0; k < T; k++) begin
      first_round = (k == 0); last_round = (k == T - 1);
      for (int r = 0; r < MAX_ROWS; r++) begin
        for (int l = 0; l < LANES; l++) begin a[l] = X[r][k*LANES+l]; b[l] = 0.0; end
        send_row(r, k, a, b);
      end
    end
    first_round = 0; last_round = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    real a [LANES], b [LANES];
    op = NPE_SWIGLU; first_round = 0; last_round = 0; rms_center = 1;
    inv_d = r2x(1.0 / D); inv_sqrt_dk = r2x(0.5); eps = 32'sd1; pos_base = 16'd3;
    bitmask = 8'b1011_0110;
    in_row = 0; in_col = 0; gamma_addr = 0; rot_pos = 0; rot_chunk = 0;
    foreach (in_a[l]) begin in_a[l] = 0; in_b[l] = 0; gamma_data[l] = 0; end
    foreach (rot_cos[l]) begin rot_cos[l] = 0; rot_sin[l] = 0; end
    for (int r = 0; r < MAX_ROWS; r++)
      for (int i = 0; i < D; i++) X[r][i] = (rnd(0, 800) - 400) / 100.0 + 0.3 * r;
    for (int i = 0; i < D; i++) G[i] = 0.5 + rnd(0, 100) / 100.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // gamma memory
    for (int k = 0; k < T; k++) begin
      gamma_we = 1; gamma_addr = k[$clog2(GW)-1:0];
      for (int l = 0; l < LANES; l++) gamma_data[l] = r2f(G[k*LANES+l]);
      @(negedge clk);
    end
    gamma_we = 0;

    // ---- RMSNorm, mean/variance form and plain RMS form ------------
    for (int center = 1; center >= 0; center--) begin
      rms_center = center[0];
      stat_pass(NPE_RMS_STAT);
      op = NPE_RMS_NORM;
      begin
        int rank; rank = 0;
        for (int r = 0; r < MAX_ROWS; r++) if (bitmask[r]) begin
          real mu, m2, sg;
          mu = 0; m2 = 0;
          for (int i = 0; i < D; i++) begin mu += f2r(r2f(X[r][i])); m2 += f2r(r2f(X[r][i])) * f2r(r2f(X[r][i])); end
          mu = mu / D; m2 = m2 / D;
          if (!center) mu = 0;
          sg = $sqrt(m2 - mu * mu);
          for (int k = 0; k < T; k++) begin
            for (int l = 0; l < LANES; l++) begin
              a[l] = X[r][k*LANES+l]; b[l] = 0;
              expq.push_back((f2r(r2f(a[l])) - mu) / sg * f2r(r2f(G[k*LANES+l])));
            end
            if (rank == 0 && k == 0) lat_start = $time;
            send_row(rank, k, a, b);
          end
          rank++;
        end
      end
      repeat (5) @(negedge clk);
    end

    // ---- softmax ----------------------------------------------------
    stat_pass(NPE_SM_STAT);
    op = NPE_SM_NORM;
    for (int r = 0; r < MAX_ROWS; r++) begin
      real mx, sm;
      mx = -1e9; sm = 0;
      for (int i = 0; i < D; i++) if (f2r(r2f(X[r][i])) * 0.5 > mx) mx = f2r(r2f(X[r][i])) * 0.5;
      for (int i = 0; i < D; i++) sm += $exp(f2r(r2f(X[r][i])) * 0.5 - mx);
      for (int k = 0; k < T; k++) begin
        for (int l = 0; l < LANES; l++) begin
          a[l] = X[r][k*LANES+l]; b[l] = 0;
          expq.push_back($exp(f2r(r2f(a[l])) * 0.5 - mx) / sm);
        end
        send_row(r, k, a, b);
      end
    end
    repeat (5) @(negedge clk);

    // ---- SwiGLU -----------------------------------------------------
    op = NPE_SWIGLU;
    for (int n = 0; n < 16; n++) begin
      for (int l = 0; l < LANES; l++) begin
        real g, u;
        a[l] = (rnd(0, 1200) - 600) / 100.0;
        b[l] = (rnd(0, 800) - 400) / 100.0;
        g = f2r(r2f(a[l])); u = f2r(r2f(b[l]));
        expq.push_back(g / (1.0 + $exp(-g)) * u);
      end
      send_row(n % MAX_ROWS, 0, a, b);
    end
    repeat (5) @(negedge clk);

    // ---- RoPE ---------------------------------------------------------
    for (int p = 0; p < RP; p++)
      for (int c = 0; c < RC; c++) begin
        rot_we = 1; rot_pos = p[$clog2(RP)-1:0]; rot_chunk = c[$clog2(RC)-1:0];
        for (int j = 0; j < LANES/2; j++) begin
          rot_cos[j] = r2f($cos(p * (0.3 + 0.1 * (c * LANES/2 + j))));
          rot_sin[j] = r2f($sin(p * (0.3 + 0.1 * (c * LANES/2 + j))));
        end
        @(negedge clk);
      end
    rot_we = 0;
    op = NPE_ROPE;
    begin
      int rank; rank = 0;
      for (int r = 0; r < MAX_ROWS; r++) if (bitmask[r]) begin
        for (int c = 0; c < RC; c++) begin
          for (int j = 0; j < LANES/2; j++) begin
            real xe, xo, cs, sn;
            a[2*j] = X[r][2*j]; a[2*j+1] = X[r][2*j+1]; b[2*j] = 0; b[2*j+1] = 0;
            xe = f2r(r2f(a[2*j])); xo = f2r(r2f(a[2*j+1]));
            cs = f2r(r2f($cos((3 + r) * (0.3 + 0.1 * (c * LANES/2 + j)))));
            sn = f2r(r2f($sin((3 + r) * (0.3 + 0.1 * (c * LANES/2 + j)))));
            expq.push_back(xe * cs - xo * sn);
            expq.push_back(xe * sn + xo * cs);
          end
          send_row(rank, c, a, b);
        end
        rank++;
      end
    end
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: first RMS_NORM row enters at lat_start; its output must appear 3 clocks later
  initial begin
    lat_seen = 0;
    wait (rst_n);
    @(posedge out_valid);
    checks++;
    if (($time - lat_start + 5) / 10 != 3) begin failures++; $display("latency %0d", ($time - lat_start + 5) / 10); end
  end
endmodule
