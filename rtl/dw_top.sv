// dw_top: the accelerator's programmable-logic part, N_CU independent
// Wilson-Dirac compute units working in parallel (three fit the target card
// in the benchmarked configuration). Each unit has its own three input
// streams and one output stream, which would be driven by separate memory
// channels; the memory controllers, bus masters and host DMA are outside
// this design, so the stream side of every unit is a port here. kappa,
// start and reset are shared; done is per unit.
module dw_top
  import dw_pkg::*;
#(
  parameter int unsigned N_CU = 3,
  parameter int unsigned LX   = 8,
  parameter int unsigned LY   = 8,
  parameter int unsigned LZ   = 8,
  parameter int unsigned LT   = 8,
  parameter int unsigned II   = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  flt_t                kappa,
  input  logic    [N_CU-1:0] in1_valid,
  output logic    [N_CU-1:0] in1_ready,
  input  spinor_t [N_CU-1:0] in1_data,
  input  logic    [N_CU-1:0] in2_valid,
  output logic    [N_CU-1:0] in2_ready,
  input  links_t  [N_CU-1:0] in2_data,
  input  logic    [N_CU-1:0] in3_valid,
  output logic    [N_CU-1:0] in3_ready,
  input  links_t  [N_CU-1:0] in3_data,
  output logic    [N_CU-1:0] out_valid,
  input  logic    [N_CU-1:0] out_ready,
  output spinor_t [N_CU-1:0] out_data,
  output logic    [N_CU-1:0] done
);
  for (genvar k = 0; k < N_CU; k++) begin : g_cu
    dw_compute_unit #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT), .II(II)) u_cu (
      .clk, .rst_n, .start, .kappa,
      .in1_valid(in1_valid[k]), .in1_ready(in1_ready[k]), .in1_data(in1_data[k]),
      .in2_valid(in2_valid[k]), .in2_ready(in2_ready[k]), .in2_data(in2_data[k]),
      .in3_valid(in3_valid[k]), .in3_ready(in3_ready[k]), .in3_data(in3_data[k]),
      .out_valid(out_valid[k]), .out_ready(out_ready[k]), .out_data(out_data[k]),
      .done(done[k])
    );
  end
endmodule
