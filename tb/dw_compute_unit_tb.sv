// dw_compute_unit_tb: end-to-end test of one compute unit on a small
// 4 x 2 x 2 x 3 lattice with II = 2 and an output FIFO of 16 words.
//
// The testbench holds a random spinor field and random forward links
// U_mu(x); the backward link stream carries U_mu(x-mu) taken from the same
// forward links, so the unit applies a consistent periodic Wilson-Dirac
// operator. Every result is compared with the operator computed in double
// precision from the field (tolerance 1e-4).
// Pass 1 drives all streams with random gaps and holds out_ready low in
// bursts, so that the unit waits for its window, waits for links, runs out
// of output credit and is throttled by II. Pass 2 (after start) keeps all
// streams busy and out_ready high and checks that sites are issued exactly
// every II cycles whenever output credit allows (the 16-word FIFO is
// smaller than the pipeline, so credit also runs out in this pass). Each mechanism is counted and must occur; results must
// also leave while input is still arriving (overlap).
module dw_compute_unit_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int LX = 4, LY = 2, LZ = 2, LT = 3;
  localparam int II = 2, OUT_DEPTH = 16;
  localparam int V3 = LX * LY * LZ;
  localparam int NSITES = V3 * LT;
  localparam int TOTAL = (LT + 2) * V3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;

  logic    start, in1_valid, in1_ready, in2_valid, in2_ready, in3_valid, in3_ready;
  logic    out_valid, out_ready, done;
  spinor_t in1_data, out_data;
  links_t  in2_data, in3_data;
  flt_t    kappa;

  dw_compute_unit #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT), .II(II), .OUT_DEPTH(OUT_DEPTH)) dut (
    .clk, .rst_n, .start, .kappa,
    .in1_valid, .in1_ready, .in1_data,
    .in2_valid, .in2_ready, .in2_data,
    .in3_valid, .in3_ready, .in3_data,
    .out_valid, .out_ready, .out_data, .done);

  spinor_t field [NSITES];
  links_t  ufwd  [NSITES];

  function automatic int site(int x, int y, int z, int t);
    return ((((t + LT) % LT) * LZ + (z + LZ) % LZ) * LY + (y + LY) % LY) * LX + (x + LX) % LX;
  endfunction

  function automatic links_t ubwd(int i);
    links_t b;
    int x, y, z, t;
    x = i % LX; y = (i / LX) % LY; z = (i / (LX * LY)) % LZ; t = i / V3;
    b[0] = ufwd[site(x - 1, y, z, t)][0];
    b[1] = ufwd[site(x, y - 1, z, t)][1];
    b[2] = ufwd[site(x, y, z - 1, t)][2];
    b[3] = ufwd[site(x, y, z, t - 1)][3];
    return b;
  endfunction

  function automatic spinor_t [NNB-1:0] nbrs(int i);
    spinor_t [NNB-1:0] n;
    int x, y, z, t;
    x = i % LX; y = (i / LX) % LY; z = (i / (LX * LY)) % LZ; t = i / V3;
    n[0] = field[i];
    n[1] = field[site(x + 1, y, z, t)]; n[2] = field[site(x - 1, y, z, t)];
    n[3] = field[site(x, y + 1, z, t)]; n[4] = field[site(x, y - 1, z, t)];
    n[5] = field[site(x, y, z + 1, t)]; n[6] = field[site(x, y, z - 1, t)];
    n[7] = field[site(x, y, z, t + 1)]; n[8] = field[site(x, y, z, t - 1)];
    return n;
  endfunction

  // stream position q of in1 -> lattice site (halo slices wrap in t)
  function automatic int in1_site(int q);
    return site(q % V3 % LX, (q % V3 / LX) % LY, q % V3 / (LX * LY), q / V3 - 1);
  endfunction

  int  n1, n2, n_out, pass;
  bit  busy_mode;      // pass 2: every stream always valid, out always ready
  int  cyc, last_issue;
  bit  credit_short;   // output credit ran out since the last issue
  int  st_window, st_links, st_credit, st_ii, overlap, ii_exact, ii_wrong;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream drivers (change at the falling edge, sampled at the rising one)
  always @(negedge clk) begin
    in1_valid <= (n1 < TOTAL) && (busy_mode || $urandom_range(0, 3) != 0);
    in1_data  <= field[in1_site(n1 < TOTAL ? n1 : 0)];
    in2_valid <= (n2 < NSITES) && (busy_mode || $urandom_range(0, 4) != 0);
    in3_valid <= (n2 < NSITES) && (busy_mode || $urandom_range(0, 4) != 0);
    in2_data  <= ufwd[n2 < NSITES ? n2 : 0];
    in3_data  <= ubwd(n2 < NSITES ? n2 : 0);
    if (busy_mode) out_ready <= 1'b1;
    else if ((cyc / 64) % 2 == 1) out_ready <= 1'b0;      // long back-pressure bursts
    else out_ready <= ($urandom_range(0, 2) != 0);
  end

  // counters and output check at the rising edge
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && !start) begin
      if (in1_valid && in1_ready) n1 <= n1 + 1;
      // in2/in3 are taken together; a beat needs both valid
      if (in2_valid && in2_ready) n2 <= n2 + 1;
      if (in2_valid && in2_ready && !in3_valid) begin
        failures++; $display("in2 taken without in3");
      end
      if (dut.ii_ok && dut.credit_ok && in2_valid && in3_valid && !dut.win_valid && n2 < NSITES) st_window++;
      if (dut.win_valid && dut.credit_ok && dut.ii_ok && !(in2_valid && in3_valid)) st_links++;
      if (dut.win_valid && !dut.credit_ok) begin
        st_credit++;
        credit_short <= 1'b1;
      end
      if (dut.win_valid && !dut.ii_ok) st_ii++;
      if (dut.issue) begin
        if (busy_mode && last_issue >= 0) begin
          if (cyc - last_issue == II) ii_exact++;
          else if (!credit_short) begin
            ii_wrong++;
            $display("compute unit: issue gap %0d at site %0d", cyc - last_issue, n2);
          end
        end
        last_issue <= cyc;
        credit_short <= 1'b0;
      end
      if (out_valid && out_ready) begin
        rspinor_t e;
        int bad;
        if (n1 < TOTAL) overlap++;
        dslash_ref(e, nbrs(n_out), ufwd[n_out], ubwd(n_out), kappa);
        bad = spinor_diff(out_data, e, 1e-4);
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 5) $display("compute unit: site %0d, %0d components wrong", n_out, bad);
        end
        n_out <= n_out + 1;
      end
    end
  end

  task automatic new_field();
    for (int i = 0; i < NSITES; i++) begin
      field[i] = rand_spinor();
      for (int m = 0; m < 4; m++) ufwd[i][m] = rand_su3();
    end
  endtask

  task automatic expect_count(string what, int n);
    checks++;
    $display("compute unit: %s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("compute unit: %s never happened", what);
    end
  endtask

  initial begin
    start = 0; busy_mode = 0; out_ready = 0; in1_valid = 0; in2_valid = 0; in3_valid = 0;
    in1_data = '0; in2_data = '0; in3_data = '0;
    n1 = 0; n2 = 0; n_out = 0; cyc = 0; last_issue = -1;
    st_window = 0; st_links = 0; st_credit = 0; st_ii = 0; overlap = 0;
    ii_exact = 0; ii_wrong = 0; credit_short = 0;
    kappa = from_real(0.137);
    new_field();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (pass = 0; pass < 2; pass++) begin
      wait (n_out == NSITES);
      repeat (2) @(posedge clk);
      checks++;
      if (!done) begin failures++; $display("compute unit: done missing"); end
      @(negedge clk);
      start = 1; busy_mode = 1; kappa = from_real(0.11);
      new_field();
      n1 = 0; n2 = 0; n_out = 0; last_issue = -1;
      @(negedge clk);
      start = 0;
    end
    expect_count("waits for the neighbour window", st_window);
    expect_count("waits for link data", st_links);
    expect_count("output credit stalls", st_credit);
    expect_count("II throttle cycles", st_ii);
    expect_count("results sent while input still arriving", overlap);
    expect_count("issues exactly II apart at full rate", ii_exact);
    checks++;
    if (ii_wrong != 0) begin
      failures++;
      $display("compute unit: %0d issues not II apart at full rate", ii_wrong);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
