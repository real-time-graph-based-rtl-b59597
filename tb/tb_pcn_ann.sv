// tb_pcn_ann: self-checking testbench of the all-nearest-neighbour distance unit.
// Random events and random query rows; every distance of every lane is compared with
// the reference squared Euclidean distance one cycle after the query was applied,
// including the extreme coordinates -128 and 127.
module tb_pcn_ann;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int N = 32, PAR = 2, D = 6, W = 8, DW = 2 * W + $clog2(D) + 1, NCYC = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic signed [W-1:0] query [PAR][D];
  logic signed [W-1:0] pts [N][D];
  logic [DW-1:0] dists [PAR][N];

  pcn_ann #(.NMAX(N), .PAR(PAR), .D(D), .DATA_W(W)) dut (.*);

  longint expd [NCYC][PAR][N];
  logic   expv [NCYC];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int t);
    int v;
    v = $urandom_range(0, 9);
    if (t < 5 && v < 5) return (v[0]) ? 127 : -128;   // extremes early on
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  initial begin
    in_valid = 1'b0;
    query = '{default: '0};
    pts = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      @(negedge clk);
      if (t >= 1) begin
        checks++;
        if (out_valid != expv[t-1]) begin
          failures++;
          $display("valid wrong at %0d", t);
        end
        for (int l = 0; l < PAR; l++)
          for (int j = 0; j < N; j++) begin
            checks++;
            if (longint'(dists[l][j]) != expd[t-1][l][j]) begin
              failures++;
              $display("t %0d lane %0d pt %0d: got %0d exp %0d", t, l, j, dists[l][j], expd[t-1][l][j]);
            end
          end
      end
      in_valid = 1'($urandom_range(0, 1));
      expv[t] = in_valid;
      if (t % 8 == 0) for (int j = 0; j < N; j++) for (int k = 0; k < D; k++) pts[j][k] = W'(rnd(t));
      for (int l = 0; l < PAR; l++) for (int k = 0; k < D; k++) query[l][k] = W'(rnd(t));
      for (int l = 0; l < PAR; l++)
        for (int j = 0; j < N; j++) begin
          row_t a, b;
          a = {};
          b = {};
          for (int k = 0; k < D; k++) begin
            a.push_back(int'(query[l][k]));
            b.push_back(int'(pts[j][k]));
          end
          expd[t][l][j] = sqdist(a, b);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
