// tb_pcn_aggregate: self-checking testbench of the mult / max reduce / sum reduce stage.
// Random weights, features and absent-neighbour masks (including all-absent and
// saturating cases); outputs must match an independent per-feature loop two cycles later.
module tb_pcn_aggregate;
  import pcn_pkg::*;

  localparam int K = 8, DF = 8, W = 8, LAT = 2, NCYC = 150;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [7:0] weight [K];
  logic signed [W-1:0] feat [K][DF];
  logic [K-1:0] ok;
  logic signed [W-1:0] max_out [DF];
  logic signed [W-1:0] sum_out [DF];

  pcn_aggregate #(.K(K), .D_F(DF), .DATA_W(W)) dut (.*);

  int emax [NCYC][DF];
  int esum [NCYC][DF];
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
    weight = '{default: '0};
    feat = '{default: '0};
    ok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        checks++;
        if (out_valid != expv[t-LAT]) failures++;
        for (int f = 0; f < DF; f++) begin
          checks += 2;
          if (int'(max_out[f]) != emax[t-LAT][f] || int'(sum_out[f]) != esum[t-LAT][f]) begin
            failures++;
            $display("t %0d f %0d: got max %0d sum %0d exp %0d %0d", t, f, max_out[f], sum_out[f],
                     emax[t-LAT][f], esum[t-LAT][f]);
          end
        end
      end
      in_valid = 1'($urandom_range(0, 1));
      expv[t] = in_valid;
      for (int k = 0; k < K; k++) begin
        weight[k] = (t % 7 == 0) ? 8'd255 : 8'($urandom);
        ok[k] = (t % 11 == 0) ? 1'b0 : ($urandom_range(0, 3) != 0);
        for (int f = 0; f < DF; f++) feat[k][f] = (t % 7 == 0) ? W'(127 - f * 60) : W'($urandom);
      end
      for (int f = 0; f < DF; f++) begin
        int m, s, cnt;
        m = 0; s = 0; cnt = 0;
        for (int k = 0; k < K; k++) begin
          if (ok[k]) begin
            int msg;
            msg = (int'(feat[k][f]) * int'(weight[k])) >>> 8;
            if (cnt == 0 || msg > m) m = msg;
            s += msg;
            cnt++;
          end
        end
        emax[t][f] = m;
        esum[t][f] = (s > 127) ? 127 : (s < -128) ? -128 : s;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
