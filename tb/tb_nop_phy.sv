// tb_nop_phy: random flit and credit traffic through a LAT = 3 PHY; every
// flit and credit must come out unchanged, in order, exactly LAT cycles later.
module tb_nop_phy;
  import cifher_pkg::*;
  localparam int FW = 4, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic f_in_valid = 0, f_out_valid, c_in_valid = 0, c_out_valid;
  logic [1:0] f_in_vc, f_out_vc, c_in_vc, c_out_vc;
  flit_hdr_t f_in_hdr, f_out_hdr;
  word_t f_in_data [FW], f_out_data [FW];
  nop_phy #(.FW(FW), .LAT(LAT)) dut (.*);
  logic          hv [256];
  flit_hdr_t     hh [256];
  logic [1:0]    hc [256];
  logic          cv [256];
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // inputs are recorded and outputs checked at the falling edge, when both
  // are stable: an input seen at falling edge m appears at falling edge m+LAT
  int ncyc = 0;
  always @(negedge clk) if (rst_n) begin
    ncyc++;
    hv[ncyc % 256] = f_in_valid; hh[ncyc % 256] = f_in_hdr; hc[ncyc % 256] = f_in_vc;
    cv[ncyc % 256] = c_in_valid;
    if (ncyc > 10) begin
      int o;
      o = (ncyc - LAT) % 256;
      checks += 2;
      if (f_out_valid !== hv[o] || (hv[o] && (f_out_hdr !== hh[o] || f_out_vc !== hc[o] || f_out_data[1] !== word_t'(hh[o])))) failures++;
      if (c_out_valid !== cv[o]) failures++;
    end
  end
  initial begin
    flit_hdr_t h;
    repeat (2) @(posedge clk); rst_n <= 1;
    repeat (200) begin
      @(posedge clk);
      f_in_valid <= $urandom % 2; c_in_valid <= $urandom % 2;
      f_in_vc <= 2'($urandom); c_in_vc <= 2'($urandom);
      h = flit_hdr_t'($urandom);
      f_in_hdr <= h;
      for (int i = 0; i < FW; i++) f_in_data[i] <= $urandom;
      // payload word 1 mirrors the header so the data path is checked too
      f_in_data[1] <= word_t'(h);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
