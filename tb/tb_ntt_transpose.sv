// tb_ntt_transpose: P = 4. Streams three blocks (the first two back to back,
// the third after a gap and with a bubble inside) and checks that block
// outputs are the transposes, in order, with the first column registered
// on the clock edge after the one that takes a block's last row (seen by
// the edge-sampling monitor two edges after that row).
module tb_ntt_transpose;
  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic in_valid = 0, out_valid;
  logic [31:0] in_data [P], out_data [P];
  ntt_transpose #(.P(P)) dut (.*);
  logic [31:0] m [3][P][P];
  int ob = 0, oc = 0, last_in [3], first_out [3];
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int ib = 0, ir = 0;
  always @(posedge clk) if (in_valid) begin
    if (ir == P - 1) begin last_in[ib] = cyc; ib++; ir = 0; end
    else ir++;
  end
  always @(posedge clk) if (out_valid && ob < 3) begin
    if (oc == 0) first_out[ob] = cyc;
    for (int l = 0; l < P; l++) begin
      checks++;
      if (out_data[l] !== m[ob][l][oc]) begin failures++; if (failures < 4) $display("cyc %0d ob %0d oc %0d l %0d got %h exp %h", cyc, ob, oc, l, out_data[l], m[ob][l][oc]); end
    end
    oc++;
    if (oc == P) begin oc = 0; ob++; end
  end
  initial begin
    for (int b = 0; b < 3; b++) for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) m[b][i][j] = $urandom;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int b = 0; b < 3; b++) begin
      if (b == 2) begin in_valid <= 0; repeat (6) @(posedge clk); end
      for (int r = 0; r < P; r++) begin
        if (b == 2 && r == 2) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        for (int l = 0; l < P; l++) in_data[l] <= m[b][r][l];
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3*P) @(posedge clk);
    checks++;
    if (ob != 3) failures++;
    for (int b = 0; b < 3; b++) begin
      checks++;
      if (first_out[b] - last_in[b] != 2) begin
        failures++; $display("block %0d latency %0d", b, first_out[b] - last_in[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
