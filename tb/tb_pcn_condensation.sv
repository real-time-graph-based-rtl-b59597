// tb_pcn_condensation: self-checking testbench of the condensation point selection GPE.
// Five events (three back to back, then gaps) with random beta and clustering
// coordinates chosen so that clusters, noise points and ties all occur; different point
// counts. Each output row must carry its input features unchanged and the is_cp /
// assigned / cid values of the sequential reference (pcn_ref_pkg::cps_ref). Timing: the
// first output beat of an event appears 2*NMAX/PAR + 3 cycles after its last input beat
// and the beats of an event are consecutive.
module tb_pcn_condensation;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int N = 32, PAR = 2, W = 8, DO = 9, CC = 2, BEATS = N / PAR, NEV = 5;
  localparam int LATENCY = 2 * BEATS + 3;
  localparam int T_BETA = 8, T_D2 = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pcyc = 0;
  always @(posedge clk) pcyc <= pcyc + 1;

  ctrl_t in_ctrl, out_ctrl;
  logic signed [W-1:0] in_data [PAR][DO];
  logic signed [W-1:0] out_data [PAR][DO];
  logic [PAR-1:0] out_is_cp, out_assigned;
  logic [4:0] out_cid [PAR];
  logic fifo_overflow;

  logic signed [W-1:0] cfg_t_beta = W'(T_BETA);
  logic [17:0] cfg_t_d2 = 18'(T_D2);

  pcn_condensation #(.NMAX(N), .PAR(PAR), .DATA_W(W), .D_O(DO), .CC_DIM(CC)) dut (.*);

  mat_t ev_x [NEV];
  bit   ev_cp [NEV][];
  bit   ev_as [NEV][];
  int   ev_cid [NEV][];
  int   nodes_of [NEV];
  int   last_in [NEV];
  int   gaps [NEV] = '{0, 0, 0, 3, 40};
  int   out_beats = 0, prev_out = -1, n_cp = 0, n_noise = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int nlist [NEV] = '{32, 17, 32, 2, 25};
    in_ctrl = '0;
    in_data = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < NEV; e++) begin
      mat_t x;
      x = {};
      nodes_of[e] = nlist[e];
      for (int i = 0; i < N; i++) begin
        row_t r;
        r = {};
        r.push_back(int'($urandom_range(0, 40)) - 16);          // beta, ties likely
        for (int d = 0; d < CC; d++) r.push_back(int'($urandom_range(0, 96)) - 48);
        for (int d = CC + 1; d < DO; d++) r.push_back(int'($urandom_range(0, 255)) - 128);
        x.push_back(r);
      end
      ev_x[e] = x;
      cps_ref(x, nlist[e], CC, T_BETA, longint'(T_D2), ev_cp[e], ev_as[e], ev_cid[e]);
      repeat (gaps[e]) begin
        @(negedge clk);
        in_ctrl = '0;
      end
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_ctrl.valid = 1'b1;
        in_ctrl.last = (b == BEATS - 1);
        in_ctrl.nodes = nodes_t'(nlist[e]);
        for (int l = 0; l < PAR; l++)
          for (int d = 0; d < DO; d++) in_data[l][d] = W'(x[b*PAR+l][d]);
        last_in[e] = pcyc;
      end
    end
    @(negedge clk);
    in_ctrl = '0;
    repeat (LATENCY + BEATS + 5) @(negedge clk);
    checks++;
    if (out_beats != NEV * BEATS || fifo_overflow) begin
      failures++;
      $display("got %0d output beats, overflow %0d", out_beats, fifo_overflow);
    end
    checks++;
    if (n_cp == 0 || n_noise == 0) begin
      failures++;
      $display("stimulus did not produce both seeds and noise");
    end
    $display("seeds %0d, noise points %0d", n_cp, n_noise);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_ctrl.valid) begin
      int e, b;
      e = out_beats / BEATS;
      b = out_beats % BEATS;
      checks++;
      if ((b == 0 && pcyc != last_in[e] + LATENCY) || (b != 0 && pcyc != prev_out + 1)) begin
        failures++;
        $display("event %0d beat %0d: timing wrong (%0d, last in %0d)", e, b, pcyc, last_in[e]);
      end
      checks++;
      if (out_ctrl.last != (b == BEATS - 1) || int'(out_ctrl.nodes) != nodes_of[e]) failures++;
      for (int l = 0; l < PAR; l++) begin
        int r;
        r = b * PAR + l;
        for (int d = 0; d < DO; d++) begin
          checks++;
          if (int'(out_data[l][d]) != ev_x[e][r][d]) failures++;
        end
        checks++;
        if (out_is_cp[l] != ev_cp[e][r] || out_assigned[l] != ev_as[e][r] ||
            (ev_as[e][r] && int'(out_cid[l]) != ev_cid[e][r])) begin
          failures++;
          $display("event %0d row %0d: got cp %0d as %0d cid %0d, exp %0d %0d %0d", e, r, out_is_cp[l],
                   out_assigned[l], out_cid[l], ev_cp[e][r], ev_as[e][r], ev_cid[e][r]);
        end
        if (out_is_cp[l]) n_cp++;
        if (r < nodes_of[e] && !out_assigned[l]) n_noise++;
      end
      prev_out = pcyc;
      out_beats++;
    end
  end
endmodule
