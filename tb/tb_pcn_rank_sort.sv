// tb_pcn_rank_sort: self-checking testbench of the priority sort.
// Sorts six events back to back (one start every NMAX/PAR cycles), with random
// priorities from a narrow range (many ties) and random candidate flags. Checks that
// done rises exactly 1 + NMAX/PAR cycles after start and that the order equals the
// reference order: candidates first, then decreasing priority, then increasing index.
module tb_pcn_rank_sort;
  import pcn_pkg::*;

  localparam int N = 32, PAR = 2, W = 8, BEATS = N / PAR, NEV = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done;
  logic signed [W-1:0] prio [N];
  logic [N-1:0] cand;
  logic [4:0] sorted_idx [N];
  logic [N-1:0] sorted_cand;

  pcn_rank_sort #(.NMAX(N), .PAR(PAR), .DATA_W(W)) dut (.*);

  int exp_order [NEV][N];
  int exp_cand [NEV][N];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit goes_first(int ci, int pi, int i, int cj, int pj, int j);
    if (ci != cj) return ci > cj;
    if (pi != pj) return pi > pj;
    return i < j;
  endfunction

  initial begin
    int ndone;
    start = 1'b0;
    prio = '{default: '0};
    cand = '0;
    ndone = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NEV * BEATS + BEATS + 4; c++) begin
      @(negedge clk);
      // done of event e is due 1 + BEATS cycles after its start cycle e*BEATS
      if (c >= BEATS + 1 && (c - BEATS - 1) % BEATS == 0 && (c - BEATS - 1) / BEATS < NEV) begin
        int e;
        e = (c - BEATS - 1) / BEATS;
        checks++;
        if (!done) begin
          failures++;
          $display("event %0d: done missing", e);
        end
        for (int r = 0; r < N; r++) begin
          checks++;
          if (int'(sorted_idx[r]) != exp_order[e][r] || int'(sorted_cand[r]) != exp_cand[e][r]) begin
            failures++;
            $display("event %0d rank %0d: got %0d/%0d exp %0d/%0d", e, r, sorted_idx[r], sorted_cand[r],
                     exp_order[e][r], exp_cand[e][r]);
          end
        end
        ndone++;
      end else begin
        checks++;
        if (done) begin
          failures++;
          $display("unexpected done at %0d", c);
        end
      end
      start = 1'b0;
      if (c % BEATS == 0 && c / BEATS < NEV) begin
        int e;
        int ord [N];
        e = c / BEATS;
        start = 1'b1;
        for (int i = 0; i < N; i++) begin
          prio[i] = W'(int'($urandom_range(0, 8)) - 4 + ((e == 0) ? 0 : int'($urandom_range(0, 200)) - 100));
          cand[i] = $urandom_range(0, 2) != 0;
          ord[i] = i;
        end
        // insertion sort reference
        for (int i = 1; i < N; i++) begin
          int j, x;
          x = ord[i];
          j = i - 1;
          while (j >= 0 && goes_first(int'(cand[x]), int'(prio[x]), x, int'(cand[ord[j]]), int'(prio[ord[j]]), ord[j])) begin
            ord[j+1] = ord[j];
            j--;
          end
          ord[j+1] = x;
        end
        for (int r = 0; r < N; r++) begin
          exp_order[e][r] = ord[r];
          exp_cand[e][r] = int'(cand[ord[r]]);
        end
      end
    end
    checks++;
    if (ndone != NEV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
