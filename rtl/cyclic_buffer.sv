// cyclic_buffer: on-chip window over the streamed spinor field.
//
// The spinor field arrives once, in lexicographic order (x fastest, then
// y, z, t), as one stream of (LT+2)*V3 spinors, V3 = LX*LY*LZ: a halo copy
// of time slice LT-1, the LT slices of the local lattice, and a halo copy
// of slice 0 (the halo slices give the periodic neighbours in t; providing
// them is the sender's job). With the sites also processed in lexicographic
// order, every neighbour of site i lies within V3 stream positions of its
// centre, stream index i+V3. The buffer therefore keeps a cyclic window of
// D = 2*V3+2 spinors: 2*V3+1 for the current site's neighbourhood and one
// slot that can be refilled while the current site is read. Each spinor is
// transferred from memory exactly once and read up to 9 times from here.
// Neighbours in x, y and z wrap periodically inside their slice.
//
// Interface:
//   wr_valid/wr_ready/wr_data  incoming spinor stream; a beat is accepted
//                              while the slot it goes to is no longer
//                              needed by a site still to be processed
//   win_valid                  all 9 spinors of the next site are present
//   advance                    the site has been taken (only with
//                              win_valid); moves the window by one
//   nb                         combinational read of the 9 spinors: centre,
//                              then +x,-x,+y,-y,+z,-z,+t,-t
//   start                      re-arms the buffer for a new sweep (reset
//                              does the same)
//   done                       all LT*V3 sites have been taken
// The 9 reads are asynchronous; the stencil registers them as its stage 1,
// so that all data of a site is loaded in a single cycle.
// Window organisation, depth and streaming order are this design's choice.
module cyclic_buffer
  import dw_pkg::*;
#(
  parameter int unsigned LX = 8,
  parameter int unsigned LY = 8,
  parameter int unsigned LZ = 8,
  parameter int unsigned LT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  spinor_t           wr_data,
  output logic              win_valid,
  input  logic              advance,
  output spinor_t [NNB-1:0] nb,
  output logic              done
);
  localparam int unsigned V3     = LX * LY * LZ;
  localparam int unsigned NSITES = V3 * LT;
  localparam int unsigned TOTAL  = (LT + 2) * V3;
  localparam int unsigned D      = 2 * V3 + 2;
  localparam int unsigned AW     = $clog2(D);
  localparam int unsigned CW     = $clog2(TOTAL + 1);
  localparam int unsigned XW     = (LX > 1) ? $clog2(LX) : 1;
  localparam int unsigned YW     = (LY > 1) ? $clog2(LY) : 1;
  localparam int unsigned ZW     = (LZ > 1) ? $clog2(LZ) : 1;

  spinor_t mem [D];

  logic [CW-1:0] rcv, iss;
  logic [AW-1:0] wptr, cptr;
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [ZW-1:0] z;

  logic wr_fire;
  assign wr_ready  = (rcv < CW'(TOTAL)) && (rcv <= iss + CW'(2 * V3 + 1));
  assign win_valid = (iss < CW'(NSITES)) && (rcv >= iss + CW'(2 * V3 + 1));
  assign done      = (iss == CW'(NSITES));
  assign wr_fire   = wr_valid && wr_ready;

  function automatic logic [AW-1:0] inc_mod(logic [AW-1:0] p);
    return (p == AW'(D - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcv  <= '0;
      iss  <= '0;
      wptr <= '0;
      cptr <= AW'(V3);
      x    <= '0;
      y    <= '0;
      z    <= '0;
    end else if (start) begin
      rcv  <= '0;
      iss  <= '0;
      wptr <= '0;
      cptr <= AW'(V3);
      x    <= '0;
      y    <= '0;
      z    <= '0;
    end else begin
      if (wr_fire) begin
        rcv  <= rcv + 1'b1;
        wptr <= inc_mod(wptr);
      end
      if (advance && win_valid) begin
        iss  <= iss + 1'b1;
        cptr <= inc_mod(cptr);
        if (x != XW'(LX - 1)) x <= x + 1'b1;
        else begin
          x <= '0;
          if (y != YW'(LY - 1)) y <= y + 1'b1;
          else begin
            y <= '0;
            z <= (z == ZW'(LZ - 1)) ? '0 : z + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wptr] <= wr_data;
  end

  // neighbour offsets in stream positions, relative to the centre
  int off [NNB];
  always_comb begin
    off[0] = 0;
    off[1] = (x == XW'(LX - 1)) ? -(int'(LX) - 1) : 1;
    off[2] = (x == '0)          ?  (int'(LX) - 1) : -1;
    off[3] = (y == YW'(LY - 1)) ? -(int'(LY) - 1) * int'(LX) : int'(LX);
    off[4] = (y == '0)          ?  (int'(LY) - 1) * int'(LX) : -int'(LX);
    off[5] = (z == ZW'(LZ - 1)) ? -(int'(LZ) - 1) * int'(LX * LY) : int'(LX * LY);
    off[6] = (z == '0)          ?  (int'(LZ) - 1) * int'(LX * LY) : -int'(LX * LY);
    off[7] = int'(V3);
    off[8] = -int'(V3);
  end

  for (genvar k = 0; k < NNB; k++) begin : g_rd
    int a;
    always_comb begin
      a = int'(cptr) + off[k];
      if (a < 0)           a = a + int'(D);
      else if (a >= int'(D)) a = a - int'(D);
    end
    assign nb[k] = mem[AW'(a)];
  end

endmodule
