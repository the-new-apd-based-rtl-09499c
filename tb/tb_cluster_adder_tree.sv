// tb_cluster_adder_tree -- self-checking test of the pipelined cluster
// counter at its full size (1320 inputs).
//
// Each cycle a new random flag vector is applied (with varying densities,
// from empty to all set). The expected output, computed independently as the
// population count of the vector saturated to 16, must appear exactly 9 cycles
// (45 ns) later, every cycle (the tree is free running). The trigger levels
// N>=1, N>=2, N>=3 are checked against the expected count.
//
// The 9-cycle latency and the saturation at 16 come from the readout
// description; the grouping of the flags is this design's choice and is not
// visible to this test, which only checks the sum.
`timescale 1ns/1ps
module tb_cluster_adder_tree;
  localparam int N = 1320;
  localparam int LAT = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] flags = '0;
  logic [4:0] count;
  logic n_ge1, n_ge2, n_ge3;
  int checks = 0, failures = 0;

  cluster_adder_tree dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen_ovf = 0;

  function automatic int popc(logic [N-1:0] v);
    int n = 0;
    for (int i = 0; i < N; i++) n += v[i];
    return n;
  endfunction

  initial begin
    int k, mode;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      mode = $urandom_range(0, 5);
      flags = '0;
      case (mode)
        0: ;                                               // empty
        1: flags[$urandom_range(0, N-1)] = 1'b1;           // one cluster
        2: for (int j = 0; j < $urandom_range(2, 20); j++) flags[$urandom_range(0, N-1)] = 1'b1;
        3: flags = '1;                                      // all
        4: for (int j = 0; j < N; j++) flags[j] = ($urandom_range(0, 99) < 1);
        default: begin                                      // exactly k, near 15/16
          k = $urandom_range(13, 18);
          for (int j = 0; j < k; j++) flags[j * 73 + 5] = 1'b1;
        end
      endcase
    end
    repeat (LAT + 2) @(negedge clk);
    if (seen_ovf == 0) begin failures++; $display("FAIL: overflow never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output check: the value applied at negedge before rising edge t shows at
  // the output after rising edge t + LAT - 1, i.e. LAT cycles later.
  int cyc = 0;
  logic [N-1:0] hist [LAT+1];
  always @(posedge clk) begin
    if (rst_n) begin
      int e;
      for (int i = LAT; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = flags;
      cyc++;
      if (cyc > LAT) begin
        #1;
        e = popc(hist[LAT-1]);
        if (e > 15) e = 16;
        checks++;
        if (count != 5'(e) || n_ge1 != (e >= 1) || n_ge2 != (e >= 2) || n_ge3 != (e >= 3)) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d count=%0d expected %0d", cyc, count, e);
        end
        if (e == 16) seen_ovf++;
      end
    end
  end
endmodule
