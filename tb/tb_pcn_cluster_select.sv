// tb_pcn_cluster_select: self-checking testbench of the greedy cluster selection.
// Six events back to back, each with a random symmetric isolation matrix (only among
// the event's existing points, diagonal set), a random visiting order and random
// candidate flags. The seeds, assignments and cluster indices are compared with a
// sequential reference of the greedy rule when done rises, exactly 1 + NMAX/PAR cycles
// after start.
module tb_pcn_cluster_select;
  import pcn_pkg::*;

  localparam int N = 32, PAR = 2, BEATS = N / PAR, NEV = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done;
  logic [N-1:0] adj [N];
  logic [4:0] sorted_idx [N];
  logic [N-1:0] sorted_cand;
  logic [N-1:0] is_cp, assigned;
  logic [4:0] cid [N];

  pcn_cluster_select #(.NMAX(N), .PAR(PAR)) dut (.*);

  bit e_cp [NEV][N];
  bit e_as [NEV][N];
  int e_cid [NEV][N];
  int n_seeds = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0;
    adj = '{default: '0};
    sorted_idx = '{default: '0};
    sorted_cand = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NEV * BEATS + BEATS + 4; c++) begin
      @(negedge clk);
      if (c >= BEATS + 1 && (c - BEATS - 1) % BEATS == 0 && (c - BEATS - 1) / BEATS < NEV) begin
        int e;
        e = (c - BEATS - 1) / BEATS;
        checks++;
        if (!done) begin
          failures++;
          $display("event %0d: done missing", e);
        end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (is_cp[i] != e_cp[e][i] || assigned[i] != e_as[e][i] || (e_as[e][i] && int'(cid[i]) != e_cid[e][i])) begin
            failures++;
            $display("event %0d point %0d: got cp %0d as %0d cid %0d exp %0d %0d %0d", e, i, is_cp[i],
                     assigned[i], cid[i], e_cp[e][i], e_as[e][i], e_cid[e][i]);
          end
        end
      end else begin
        checks++;
        if (done) failures++;
      end
      start = 1'b0;
      if (c % BEATS == 0 && c / BEATS < NEV) begin
        int e, nodes, dens;
        int ord [N];
        bit cov [N];
        e = c / BEATS;
        nodes = (e == 0) ? N : $urandom_range(1, N);
        dens = $urandom_range(2, 12);
        start = 1'b1;
        adj = '{default: '0};
        for (int i = 0; i < nodes; i++) begin
          adj[i][i] = 1'b1;
          for (int j = i + 1; j < nodes; j++) begin
            bit b;
            b = ($urandom_range(0, 99) < dens);
            adj[i][j] = b;
            adj[j][i] = b;
          end
        end
        for (int i = 0; i < N; i++) ord[i] = i;
        for (int i = N - 1; i > 0; i--) begin
          int j, x;
          j = $urandom_range(0, i);
          x = ord[i]; ord[i] = ord[j]; ord[j] = x;
        end
        for (int r = 0; r < N; r++) begin
          sorted_idx[r] = 5'(ord[r]);
          sorted_cand[r] = (ord[r] < nodes) && ($urandom_range(0, 3) != 0);
        end
        // sequential reference
        for (int i = 0; i < N; i++) begin
          cov[i] = 1'b0;
          e_cp[e][i] = 1'b0;
          e_as[e][i] = 1'b0;
          e_cid[e][i] = 0;
        end
        for (int r = 0; r < N; r++) begin
          int s;
          s = ord[r];
          if (sorted_cand[r] && !cov[s]) begin
            e_cp[e][s] = 1'b1;
            n_seeds++;
            for (int j = 0; j < N; j++)
              if (adj[s][j] && !cov[j]) begin
                cov[j] = 1'b1;
                e_as[e][j] = 1'b1;
                e_cid[e][j] = s;
              end
          end
        end
      end
    end
    checks++;
    if (n_seeds < NEV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
