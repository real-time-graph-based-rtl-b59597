// tb_pcn_exp_weight: self-checking testbench of the exp(-d) edge-weight stage.
// Sweeps the whole table (d = 0, 1/8, 2/8, ... including the saturated end) and random
// distances, with random absent slots; every weight must equal round(255 * exp(-q/8)),
// q = d quantised to 1/8 and limited to 255 (0 for absent slots), one cycle later.
module tb_pcn_exp_weight;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int NI = 8, DW = 19, FRAC = 4, NCYC = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [DW-1:0] d [NI];
  logic [NI-1:0] ok;
  logic [7:0] weight [NI];

  pcn_exp_weight #(.N_IN(NI), .DIST_W(DW), .FRAC(FRAC)) dut (.*);

  int expw [NCYC][NI];
  logic expv [NCYC];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0;
    d = '{default: '0};
    ok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      @(negedge clk);
      if (t >= 1) begin
        checks++;
        if (out_valid != expv[t-1]) failures++;
        for (int n = 0; n < NI; n++) begin
          checks++;
          if (int'(weight[n]) != expw[t-1][n]) begin
            failures++;
            $display("t %0d slot %0d: got %0d exp %0d", t, n, weight[n], expw[t-1][n]);
          end
        end
      end
      in_valid = 1'b1;
      expv[t] = 1'b1;
      for (int n = 0; n < NI; n++) begin
        if (t < 34) d[n] = DW'(((t * NI + n) << 5) + $urandom_range(0, 31));   // table sweep
        else        d[n] = DW'($urandom_range(0, (1 << 14)));
        ok[n] = (t < 34) ? 1'b1 : ($urandom_range(0, 4) != 0);
        expw[t][n] = ok[n] ? exp_ref(longint'(d[n]), FRAC) : 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
