// nop_phy: behavioural model of one die-to-die PHY of the network on
// package (the paper uses UCIe advanced-package PHYs at 16 GT/s, one per
// mesh direction of a core).
//
// The real part is a mixed-signal serialiser/deserialiser; here it is
// modelled at the flit level as a fixed LAT-cycle pipeline that carries
// flits one way (tx side: router output to link) and credits the other way
// (link to router), losslessly and in order. Flit width equals the router
// flit; the serialisation rate that would make a 2048-bit flit take one
// core cycle is not modelled. LAT is an assumed value.
module nop_phy
  import cifher_pkg::*;
#(
  parameter int unsigned FW  = 64,
  parameter int unsigned LAT = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  // flit direction
  input  logic            f_in_valid,
  input  logic [VC_W-1:0] f_in_vc,
  input  flit_hdr_t       f_in_hdr,
  input  word_t           f_in_data [FW],
  output logic            f_out_valid,
  output logic [VC_W-1:0] f_out_vc,
  output flit_hdr_t       f_out_hdr,
  output word_t           f_out_data [FW],
  // credit direction
  input  logic            c_in_valid,
  input  logic [VC_W-1:0] c_in_vc,
  output logic            c_out_valid,
  output logic [VC_W-1:0] c_out_vc
);
  logic            fv [LAT];
  logic [VC_W-1:0] fc [LAT];
  flit_hdr_t       fh [LAT];
  word_t           fd [LAT][FW];
  logic            cv [LAT];
  logic [VC_W-1:0] cc [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) begin fv[i] <= 1'b0; cv[i] <= 1'b0; end
    end else begin
      fv[0] <= f_in_valid; cv[0] <= c_in_valid;
      for (int i = 1; i < int'(LAT); i++) begin fv[i] <= fv[i-1]; cv[i] <= cv[i-1]; end
    end
  end
  always_ff @(posedge clk) begin
    fc[0] <= f_in_vc; fh[0] <= f_in_hdr; fd[0] <= f_in_data; cc[0] <= c_in_vc;
    for (int i = 1; i < int'(LAT); i++) begin
      fc[i] <= fc[i-1]; fh[i] <= fh[i-1]; fd[i] <= fd[i-1]; cc[i] <= cc[i-1];
    end
  end
  assign f_out_valid = fv[LAT-1];
  assign f_out_vc    = fc[LAT-1];
  assign f_out_hdr   = fh[LAT-1];
  assign f_out_data  = fd[LAT-1];
  assign c_out_valid = cv[LAT-1];
  assign c_out_vc    = cc[LAT-1];
endmodule
