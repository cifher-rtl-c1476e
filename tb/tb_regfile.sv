// tb_regfile: 4 lanes, 64 rows, 3 read and 3 write ports. Random writes on
// all ports against a reference array, synchronous-read timing, and the
// higher-port-wins rule for colliding writes.
module tb_regfile;
  localparam int L = 4, D = 64, NR = 3, NW = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [5:0] raddr [NR], waddr [NW];
  logic [31:0] rdata [NR][L], wdata [NW][L];
  logic we [NW];
  regfile #(.LANES(L), .DEPTH(D), .NR(NR), .NW(NW)) dut (.*);
  logic [31:0] ref_m [D][L];
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int w = 0; w < NW; w++) we[w] = 0;
    // initialise every row through port 0
    for (int a = 0; a < D; a++) begin
      we[0] = 1; waddr[0] = 6'(a);
      for (int l = 0; l < L; l++) begin wdata[0][l] = $urandom; ref_m[a][l] = wdata[0][l]; end
      @(posedge clk); #1;
    end
    we[0] = 0;
    for (int it = 0; it < 300; it++) begin
      for (int r = 0; r < NR; r++) raddr[r] = 6'($urandom % D);
      for (int w = 0; w < NW; w++) begin
        we[w] = $urandom % 2; waddr[w] = (it % 10 == 0) ? 6'd7 : 6'($urandom % D);
        for (int l = 0; l < L; l++) wdata[w][l] = $urandom;
      end
      @(posedge clk); #1;
      for (int r = 0; r < NR; r++) for (int l = 0; l < L; l++) begin
        checks++;
        if (rdata[r][l] !== ref_m[raddr[r]][l]) failures++;   // old data on collision
      end
      for (int w = 0; w < NW; w++) if (we[w]) ref_m[waddr[w]] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
