// dw_compute_unit: one instance of the Wilson-Dirac kernel with its
// memory-side streams.
//
// Three input streams and one output stream, each a valid/ready channel
// carrying one whole element per beat:
//   in1  spinors of the field, lexicographic order with halo time slices
//        ((LT+2)*V3 beats), into the cyclic buffer
//   in2  the four forward links U_mu(x) of a site (LT*V3 beats)
//   in3  the four backward links U_mu(x-mu) of a site (LT*V3 beats)
//   out  D psi(x) for every site in lexicographic order (LT*V3 beats)
// The assignment of data to the three input channels is this design's
// choice.
//
// Issue control: a site enters the stencil pipeline when (a) its 9-spinor
// window is complete in the cyclic buffer, (b) both link streams offer a
// beat, (c) the output FIFO is sure to have room for it and (d) at least
// II cycles have passed since the previous issue. (c) is a credit count:
// sites in the pipeline plus words in the FIFO never exceed OUT_DEPTH, so
// the stall-free stencil pipeline never overruns the FIFO. Results start to
// leave through out as soon as the first site clears the 142-cycle
// pipeline, while inputs still stream in, so transfer and computation
// overlap.
//
// II = 2 is the benchmarked configuration; the stencil itself accepts a
// site every cycle, and II = 1 runs it at that rate. Here a larger II only
// spaces the issues, it does not share arithmetic units.
//
// start re-arms the unit for a new sweep (new operator application);
// done rises when all results have been taken from out.
module dw_compute_unit
  import dw_pkg::*;
#(
  parameter int unsigned LX        = 8,
  parameter int unsigned LY        = 8,
  parameter int unsigned LZ        = 8,
  parameter int unsigned LT        = 8,
  parameter int unsigned II        = 2,
  parameter int unsigned OUT_DEPTH = 256,
  parameter int unsigned S2_LAT    = 14,
  parameter int unsigned S3_LAT    = 70,
  parameter int unsigned S4_LAT    = 57
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  flt_t    kappa,
  input  logic    in1_valid,
  output logic    in1_ready,
  input  spinor_t in1_data,
  input  logic    in2_valid,
  output logic    in2_ready,
  input  links_t  in2_data,
  input  logic    in3_valid,
  output logic    in3_ready,
  input  links_t  in3_data,
  output logic    out_valid,
  input  logic    out_ready,
  output spinor_t out_data,
  output logic    done
);
  localparam int unsigned NSITES = LX * LY * LZ * LT;
  localparam int unsigned CW     = $clog2(NSITES + 1);
  localparam int unsigned OW     = $clog2(OUT_DEPTH + 1);
  localparam int unsigned IW     = (II > 1) ? $clog2(II) : 1;

  // ----------------------------------------------------------- cyclic buffer
  logic              win_valid, issue, cb_done;
  spinor_t [NNB-1:0] nb;

  cyclic_buffer #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT)) u_cbuf (
    .clk, .rst_n, .start,
    .wr_valid(in1_valid), .wr_ready(in1_ready), .wr_data(in1_data),
    .win_valid, .advance(issue), .nb, .done(cb_done)
  );

  // ----------------------------------------------------------- issue control
  logic [OW-1:0] credit_used;     // sites in the pipeline + words in FIFO
  logic [IW-1:0] ii_wait;
  logic          credit_ok, ii_ok, pop, st_valid;
  spinor_t       st_data;

  assign credit_ok = (credit_used < OW'(OUT_DEPTH));
  assign ii_ok     = (ii_wait == '0);
  assign issue     = win_valid && in2_valid && in3_valid && credit_ok && ii_ok;
  assign in2_ready = issue;
  assign in3_ready = issue;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit_used <= '0;
      ii_wait     <= '0;
    end else begin
      credit_used <= credit_used + OW'(issue) - OW'(pop);
      if (issue)         ii_wait <= IW'(II - 1);
      else if (!ii_ok)   ii_wait <= ii_wait - 1'b1;
    end
  end

  // ----------------------------------------------------------- stencil
  dw_stencil #(.S2_LAT(S2_LAT), .S3_LAT(S3_LAT), .S4_LAT(S4_LAT)) u_stencil (
    .clk, .rst_n, .in_valid(issue), .psi_nb(nb), .u_fwd(in2_data), .u_bwd(in3_data),
    .kappa, .out_valid(st_valid), .out_data(st_data)
  );

  // ----------------------------------------------------------- output
  logic fifo_empty, fifo_full;
  assign pop       = out_valid && out_ready;
  assign out_valid = !fifo_empty;

  sync_fifo #(.W(SPINOR_W), .DEPTH(OUT_DEPTH)) u_ofifo (
    .clk, .rst_n, .push(st_valid), .wr_data(st_data), .pop,
    .rd_data(out_data), .empty(fifo_empty), .full(fifo_full)
  );

  logic [CW-1:0] n_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     n_out <= '0;
    else if (start) n_out <= '0;
    else if (pop)   n_out <= n_out + 1'b1;
  end
  assign done = cb_done && (n_out == CW'(NSITES));

  a_credit: assert property (@(posedge clk) disable iff (!rst_n) st_valid |-> !fifo_full);
  a_issue:  assert property (@(posedge clk) disable iff (!rst_n) issue |-> win_valid);
endmodule
