// tb_pcn_topk: self-checking testbench of the hierarchical Top-K selection.
// Random distance rows (from a small range, so that ties are frequent) and random point
// counts, one row per cycle; the K outputs must equal the K nearest existing points in
// (distance, index) order from the reference, with absent slots when fewer than K exist,
// after the documented latency of 1 + clog2(NMAX/K) cycles.
module tb_pcn_topk;
  import pcn_pkg::*;

  localparam int N = 32, K = 8, DW = 19, LAT = 3, NCYC = 200;
  localparam int IW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [DW-1:0] dist_row [N];
  logic [N-1:0] mask;
  logic [IW-1:0] nbr_idx [K];
  logic [DW-1:0] nbr_dist [K];
  logic [K-1:0] nbr_ok;

  pcn_topk #(.NMAX(N), .K(K), .DIST_W(DW)) dut (.*);

  int exp_idx [NCYC][K];
  int exp_cnt [NCYC];
  int exp_d   [NCYC][K];
  logic expv  [NCYC];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0;
    dist_row = '{default: '0};
    mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      int nodes, range;
      bit taken [N];
      @(negedge clk);
      if (t >= LAT) begin
        checks++;
        if (out_valid != expv[t-LAT]) begin
          failures++;
          $display("valid wrong at %0d", t);
        end
        for (int r = 0; r < K; r++) begin
          checks++;
          if (nbr_ok[r] != (r < exp_cnt[t-LAT]) ||
              (nbr_ok[r] && (int'(nbr_idx[r]) != exp_idx[t-LAT][r] || int'(nbr_dist[r]) != exp_d[t-LAT][r]))) begin
            failures++;
            $display("t %0d slot %0d: got ok %0d idx %0d d %0d, exp idx %0d d %0d (cnt %0d)", t, r,
                     nbr_ok[r], nbr_idx[r], nbr_dist[r], exp_idx[t-LAT][r], exp_d[t-LAT][r], exp_cnt[t-LAT]);
          end
        end
      end
      in_valid = $urandom_range(0, 3) != 0;
      expv[t] = in_valid;
      nodes = (t % 5 == 0) ? $urandom_range(0, K) : $urandom_range(1, N);
      range = (t % 2 == 0) ? 6 : (1 << 18);
      for (int j = 0; j < N; j++) begin
        dist_row[j] = DW'($urandom_range(0, range));
        mask[j] = (j < nodes);
        taken[j] = 1'b0;
      end
      // reference: repeated minimum search over existing points
      exp_cnt[t] = 0;
      for (int r = 0; r < K; r++) begin
        int best;
        best = -1;
        for (int j = 0; j < nodes; j++)
          if (!taken[j] && (best < 0 || dist_row[j] < dist_row[best])) best = j;
        if (best >= 0) begin
          taken[best] = 1'b1;
          exp_idx[t][r] = best;
          exp_d[t][r] = int'(dist_row[best]);
          exp_cnt[t]++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
