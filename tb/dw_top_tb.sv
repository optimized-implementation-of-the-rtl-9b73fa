// dw_top_tb: end-to-end test of the whole design, scaled down to one
// compute unit on a 4 x 4 x 4 x 8 lattice (II = 2, float, output FIFO of
// the default 256 words) so that it builds and runs quickly; N_CU, the
// lattice size and II are parameters of dw_top and can be set back to the
// defaults (3 units, 8^4) here.
//
// Each unit's streams are driven independently. Pass 1 gives all streams
// random gaps and holds out_ready low in long bursts, so that every
// mechanism of the design occurs in every unit: waiting for the neighbour
// window, waiting for links, running out of output credit, the II
// throttle, and results leaving while input is still arriving. Pass 2
// (after start, new fields) keeps all streams busy and checks that each
// unit issues a site exactly every II cycles and finishes in about
// II * LX*LY*LZ*LT cycles; it reports the arithmetic rate this means at 300 MHz.
// Every result of every unit is compared with the operator computed in
// double precision (tolerance 1e-4). The backward link stream carries
// U_mu(x-mu) taken from the forward links, so the operator is consistent.
module dw_top_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int N_CU = 1;
  localparam int LX = 4, LY = 4, LZ = 4, LT = 8, II = 2;
  localparam int LATENCY = 142;
  localparam int V3 = LX * LY * LZ;
  localparam int NSITES = V3 * LT;
  localparam int TOTAL = (LT + 2) * V3;
  localparam real FLOP_PER_SITE = 1464.0;   // 96 + 1152 + 216 as counted for the kernel
  localparam real F_CLK_MHZ = 300.0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;

  logic    start;
  flt_t    kappa;
  logic    [N_CU-1:0] in1_valid, in1_ready, in2_valid, in2_ready, in3_valid, in3_ready;
  logic    [N_CU-1:0] out_valid, out_ready, done;
  spinor_t [N_CU-1:0] in1_data, out_data;
  links_t  [N_CU-1:0] in2_data, in3_data;

  dw_top #(.N_CU(N_CU), .LX(LX), .LY(LY), .LZ(LZ), .LT(LT), .II(II)) dut (
    .clk, .rst_n, .start, .kappa,
    .in1_valid, .in1_ready, .in1_data,
    .in2_valid, .in2_ready, .in2_data,
    .in3_valid, .in3_ready, .in3_data,
    .out_valid, .out_ready, .out_data, .done);

  spinor_t field [N_CU][NSITES];
  links_t  ufwd  [N_CU][NSITES];

  function automatic int site(int x, int y, int z, int t);
    return ((((t + LT) % LT) * LZ + (z + LZ) % LZ) * LY + (y + LY) % LY) * LX + (x + LX) % LX;
  endfunction

  function automatic links_t ubwd(int u, int i);
    links_t b;
    int x, y, z, t;
    x = i % LX; y = (i / LX) % LY; z = (i / (LX * LY)) % LZ; t = i / V3;
    b[0] = ufwd[u][site(x - 1, y, z, t)][0];
    b[1] = ufwd[u][site(x, y - 1, z, t)][1];
    b[2] = ufwd[u][site(x, y, z - 1, t)][2];
    b[3] = ufwd[u][site(x, y, z, t - 1)][3];
    return b;
  endfunction

  function automatic spinor_t [NNB-1:0] nbrs(int u, int i);
    spinor_t [NNB-1:0] n;
    int x, y, z, t;
    x = i % LX; y = (i / LX) % LY; z = (i / (LX * LY)) % LZ; t = i / V3;
    n[0] = field[u][i];
    n[1] = field[u][site(x + 1, y, z, t)]; n[2] = field[u][site(x - 1, y, z, t)];
    n[3] = field[u][site(x, y + 1, z, t)]; n[4] = field[u][site(x, y - 1, z, t)];
    n[5] = field[u][site(x, y, z + 1, t)]; n[6] = field[u][site(x, y, z - 1, t)];
    n[7] = field[u][site(x, y, z, t + 1)]; n[8] = field[u][site(x, y, z, t - 1)];
    return n;
  endfunction

  function automatic int in1_site(int q);
    return site(q % V3 % LX, (q % V3 / LX) % LY, q % V3 / (LX * LY), q / V3 - 1);
  endfunction

  int n1 [N_CU], n2 [N_CU], n_out [N_CU];
  int last_issue [N_CU];
  bit credit_short [N_CU];
  int st_window [N_CU], st_links [N_CU], st_credit [N_CU], st_ii [N_CU], overlap [N_CU];
  int ii_exact [N_CU], ii_wrong [N_CU];
  bit busy_mode;
  int cyc, t_start;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int u = 0; u < N_CU; u++) begin
      in1_valid[u] <= (n1[u] < TOTAL) && (busy_mode || $urandom_range(0, 3) != 0);
      in1_data[u]  <= field[u][in1_site(n1[u] < TOTAL ? n1[u] : 0)];
      in2_valid[u] <= (n2[u] < NSITES) && (busy_mode || $urandom_range(0, 5) != 0);
      in3_valid[u] <= (n2[u] < NSITES) && (busy_mode || $urandom_range(0, 5) != 0);
      in2_data[u]  <= ufwd[u][n2[u] < NSITES ? n2[u] : 0];
      in3_data[u]  <= ubwd(u, n2[u] < NSITES ? n2[u] : 0);
      if (busy_mode) out_ready[u] <= 1'b1;
      else if (cyc >= 200 && cyc < 900) out_ready[u] <= 1'b0;  // long back-pressure burst
      else out_ready[u] <= ($urandom_range(0, 3) != 0);
    end
  end

  // per-unit internal status, for counting stalls
  logic [N_CU-1:0] win_v, cred_ok, ii_ok, issue;
  for (genvar u = 0; u < N_CU; u++) begin : g_mon
    assign win_v[u]   = dut.g_cu[u].u_cu.win_valid;
    assign cred_ok[u] = dut.g_cu[u].u_cu.credit_ok;
    assign ii_ok[u]   = dut.g_cu[u].u_cu.ii_ok;
    assign issue[u]   = dut.g_cu[u].u_cu.issue;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && !start) begin
      for (int u = 0; u < N_CU; u++) begin
        if (in1_valid[u] && in1_ready[u]) n1[u] <= n1[u] + 1;
        if (in2_valid[u] && in2_ready[u]) n2[u] <= n2[u] + 1;
        if (ii_ok[u] && cred_ok[u] && in2_valid[u] && in3_valid[u] && !win_v[u] && n2[u] < NSITES)
          st_window[u]++;
        if (win_v[u] && cred_ok[u] && ii_ok[u] && !(in2_valid[u] && in3_valid[u])) st_links[u]++;
        if (win_v[u] && !cred_ok[u]) begin
          st_credit[u]++;
          credit_short[u] <= 1'b1;
        end
        if (win_v[u] && !ii_ok[u]) st_ii[u]++;
        if (issue[u]) begin
          if (busy_mode && last_issue[u] >= 0) begin
            if (cyc - last_issue[u] == II) ii_exact[u]++;
            else if (!credit_short[u]) begin
              ii_wrong[u]++;
              if (ii_wrong[u] < 3) $display("unit %0d: issue gap %0d", u, cyc - last_issue[u]);
            end
          end
          last_issue[u]   <= cyc;
          credit_short[u] <= 1'b0;
        end
        if (out_valid[u] && out_ready[u]) begin
          rspinor_t e;
          int bad;
          if (n1[u] < TOTAL) overlap[u]++;
          dslash_ref(e, nbrs(u, n_out[u]), ufwd[u][n_out[u]], ubwd(u, n_out[u]), kappa);
          bad = spinor_diff(out_data[u], e, 1e-4);
          checks++;
          if (bad != 0) begin
            failures++;
            if (failures < 5) $display("unit %0d site %0d: %0d components wrong", u, n_out[u], bad);
          end
          n_out[u] <= n_out[u] + 1;
        end
      end
    end
  end

  task automatic new_fields();
    for (int u = 0; u < N_CU; u++)
      for (int i = 0; i < NSITES; i++) begin
        field[u][i] = rand_spinor();
        for (int m = 0; m < 4; m++) ufwd[u][i][m] = rand_su3();
      end
  endtask

  function automatic bit all_out();
    for (int u = 0; u < N_CU; u++) if (n_out[u] != NSITES) return 0;
    return 1;
  endfunction

  task automatic expect_count(string what, int u, int n);
    checks++;
    $display("unit %0d: %s %0d", u, what, n);
    if (n == 0) begin
      failures++;
      $display("unit %0d: %s never happened", u, what);
    end
  endtask

  initial begin
    start = 0; busy_mode = 0; cyc = 0;
    in1_valid = '0; in2_valid = '0; in3_valid = '0; out_ready = '0;
    in1_data = '0; in2_data = '0; in3_data = '0;
    for (int u = 0; u < N_CU; u++) begin
      n1[u] = 0; n2[u] = 0; n_out[u] = 0; last_issue[u] = -1; credit_short[u] = 0;
      st_window[u] = 0; st_links[u] = 0; st_credit[u] = 0; st_ii[u] = 0; overlap[u] = 0;
      ii_exact[u] = 0; ii_wrong[u] = 0;
    end
    kappa = from_real(0.1315);
    new_fields();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      t_start = cyc;
      while (!all_out()) @(posedge clk);
      $display("pass %0d: %0d cycles for %0d sites per unit", pass, cyc - t_start, NSITES);
      if (pass == 1) begin
        real gflops;
        gflops = FLOP_PER_SITE * NSITES * N_CU / (real'(cyc - t_start) / F_CLK_MHZ) / 1000.0;
        $display("pass 1: %0.1f GFLOP/s at %0.0f MHz with %0d units", gflops, F_CLK_MHZ, N_CU);
        checks++;
        if (cyc - t_start > II * NSITES + 2 * V3 + LATENCY + 64) begin
          failures++;
          $display("full-rate pass too slow");
        end
      end
      repeat (2) @(posedge clk);
      checks++;
      if (done != '1) begin failures++; $display("done missing: %b", done); end
      if (pass == 0) begin
        @(negedge clk);
        start = 1; busy_mode = 1; kappa = from_real(0.125);
        new_fields();
        for (int u = 0; u < N_CU; u++) begin
          n1[u] = 0; n2[u] = 0; n_out[u] = 0; last_issue[u] = -1;
        end
        @(negedge clk);
        start = 0;
      end
    end
    for (int u = 0; u < N_CU; u++) begin
      expect_count("waits for the neighbour window", u, st_window[u]);
      expect_count("waits for link data", u, st_links[u]);
      expect_count("output credit stalls", u, st_credit[u]);
      expect_count("II throttle cycles", u, st_ii[u]);
      expect_count("results sent while input still arriving", u, overlap[u]);
      expect_count("issues exactly II apart at full rate", u, ii_exact[u]);
      checks++;
      if (ii_wrong[u] != 0) begin
        failures++;
        $display("unit %0d: %0d issues not II apart at full rate", u, ii_wrong[u]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
