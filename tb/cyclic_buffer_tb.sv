// cyclic_buffer_tb: checks the cyclic neighbour window on a small lattice
// with unequal extents (4 x 3 x 2 x 3), so that every wrap-around case in
// x, y and z and both halo slices in t occur. Every streamed spinor is
// tagged with its stream position; when a site is taken, the 9 tags read
// must equal the stream positions of its centre and its 8 periodic
// neighbours, computed here from the site coordinates. The stream is fed
// and the sites are taken with random gaps, twice (start re-arms the
// buffer). Also checked: no site is offered before its last neighbour has
// arrived, the writer is held back when the window is full (counted), all
// sites are offered and done rises at the end.
module cyclic_buffer_tb;
  import dw_pkg::*;
  import tb_fp_pkg::*;

  localparam int LX = 4, LY = 3, LZ = 2, LT = 3;
  localparam int V3 = LX * LY * LZ;
  localparam int NSITES = V3 * LT;
  localparam int TOTAL = (LT + 2) * V3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;
  logic start, wr_valid, wr_ready, win_valid, advance, done;
  spinor_t wr_data;
  spinor_t [NNB-1:0] nb;

  cyclic_buffer #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT)) dut (
    .clk, .rst_n, .start, .wr_valid, .wr_ready, .wr_data,
    .win_valid, .advance, .nb, .done);

  int n_wr, n_site, full_stalls;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int spos(int x, int y, int z, int t);
    // stream position of site (x,y,z) in time slice t, t = -1 .. LT
    return (t + 1) * V3 + ((z * LY) + y) * LX + x;
  endfunction

  function automatic spinor_t tag(int q);
    spinor_t p;
    p = '0;
    p[0][0].re = 32'(q);
    p[3][2].im = ~32'(q);
    return p;
  endfunction

  // writer
  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) n_wr <= n_wr + 1;
    if (rst_n && wr_valid && !wr_ready && n_wr < TOTAL) full_stalls <= full_stalls + 1;
  end
  always @(negedge clk) begin
    wr_valid <= (n_wr < TOTAL) && ($urandom_range(0, 3) != 0);
    wr_data  <= tag(n_wr);
  end

  // consumer: check at the falling edge, take the site at the next rise
  always @(negedge clk) begin
    advance <= 1'b0;
    if (rst_n && !start && win_valid) begin
      int x, y, z, t, bad;
      int want [NNB];
      x = n_site % LX; y = (n_site / LX) % LY; z = (n_site / (LX * LY)) % LZ;
      t = n_site / V3;
      want[0] = spos(x, y, z, t);
      want[1] = spos((x + 1) % LX, y, z, t);
      want[2] = spos((x + LX - 1) % LX, y, z, t);
      want[3] = spos(x, (y + 1) % LY, z, t);
      want[4] = spos(x, (y + LY - 1) % LY, z, t);
      want[5] = spos(x, y, (z + 1) % LZ, t);
      want[6] = spos(x, y, (z + LZ - 1) % LZ, t);
      want[7] = spos(x, y, z, t + 1);
      want[8] = spos(x, y, z, t - 1);
      bad = 0;
      for (int k = 0; k < NNB; k++)
        if (nb[k] !== tag(want[k])) bad++;
      // the last neighbour (t+1) must already have been written
      if (want[7] >= n_wr) bad++;
      if ($urandom_range(0, 2) != 0) begin
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 5) $display("cyclic_buffer: site %0d, %0d wrong", n_site, bad);
        end
        advance <= 1'b1;
        n_site  <= n_site + 1;
      end
    end
  end

  initial begin
    start = 0; wr_valid = 0; advance = 0; wr_data = '0;
    n_wr = 0; n_site = 0; full_stalls = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      wait (n_site == NSITES);
      @(posedge clk); #1;
      checks++;
      if (!done || n_wr != TOTAL || win_valid) begin
        failures++;
        $display("cyclic_buffer: end of pass %0d: done=%0b writes=%0d", pass, done, n_wr);
      end
      // re-arm
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n_wr = 0; n_site = 0;
    end
    checks++;
    if (full_stalls == 0) begin
      failures++;
      $display("cyclic_buffer: the window never filled up");
    end
    $display("cyclic_buffer: window-full stalls %0d", full_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
