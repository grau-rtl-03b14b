// grau_top: the four GRAU variants side by side on one configuration bus.
//
// GRAU comes in a pipelined form (one activation per cycle, fixed latency)
// and a serialized form (one comparator and one shifter unit reused, a few
// hundred LUTs), each with PoT or APoT shifter units. This top carries one
// core of each kind so that all of them are built and can be driven from the
// same stimulus:
//   core 0: pipelined, PoT      core 1: pipelined, APoT
//   core 2: serialized, PoT     core 3: serialized, APoT
// A configuration write goes to every core whose bit is set in cfg_core_mask.
// Each core has its own input stream (the MAC results of the host
// accelerator, which is outside this design) and its own output stream.
// Pipelined cores always report in_ready = 1. Putting the four variants in
// one top is this design's packaging; an accelerator would instantiate the
// single variant it needs (grau_pipelined or grau_serial).
module grau_top
  import grau_pkg::*;
#(
  parameter int IN_W      = 32,
  parameter int SEGMENTS  = 6,
  parameter int EXPONENTS = 16,
  localparam int NCORES   = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic [NCORES-1:0]      cfg_core_mask,
  input  logic [NCORES-1:0]      in_valid,
  output logic [NCORES-1:0]      in_ready,
  input  logic signed [IN_W-1:0] in_data  [NCORES],
  output logic [NCORES-1:0]      out_valid,
  output logic [OUT_W-1:0]       out_data [NCORES],
  output logic [NCORES-1:0]      busy
);

  cfg_wr_t core_cfg [NCORES];

  always_comb begin
    for (int i = 0; i < NCORES; i++) begin
      core_cfg[i]    = cfg;
      core_cfg[i].we = cfg.we && cfg_core_mask[i];
    end
  end

  grau_pipelined #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS), .SU_KIND(SU_POT))
  u_pip_pot (
    .clk, .rst_n, .cfg(core_cfg[0]),
    .in_valid(in_valid[0]), .in_data(in_data[0]),
    .out_valid(out_valid[0]), .out_data(out_data[0]), .busy(busy[0])
  );
  assign in_ready[0] = 1'b1;

  grau_pipelined #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS), .SU_KIND(SU_APOT))
  u_pip_apot (
    .clk, .rst_n, .cfg(core_cfg[1]),
    .in_valid(in_valid[1]), .in_data(in_data[1]),
    .out_valid(out_valid[1]), .out_data(out_data[1]), .busy(busy[1])
  );
  assign in_ready[1] = 1'b1;

  grau_serial #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS), .SU_KIND(SU_POT))
  u_ser_pot (
    .clk, .rst_n, .cfg(core_cfg[2]),
    .in_valid(in_valid[2]), .in_ready(in_ready[2]), .in_data(in_data[2]),
    .out_valid(out_valid[2]), .out_data(out_data[2]), .busy(busy[2])
  );

  grau_serial #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS), .SU_KIND(SU_APOT))
  u_ser_apot (
    .clk, .rst_n, .cfg(core_cfg[3]),
    .in_valid(in_valid[3]), .in_ready(in_ready[3]), .in_data(in_data[3]),
    .out_valid(out_valid[3]), .out_data(out_data[3]), .busy(busy[3])
  );

endmodule
