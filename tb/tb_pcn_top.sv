// tb_pcn_top: end-to-end testbench of the whole accelerator at its default size
// (NMAX = 32 points, PAR = 2, 8-bit), no parameter overridden.
//
// Sends NEV events of random compressed point clouds: most back to back, some after
// gaps, with point counts from 1 to NMAX (so padding rows, events with fewer points
// than K neighbours and full events all occur). The complete network is recomputed per
// event by the sequential reference model (pcn_ref_pkg) and every output row is
// compared: the D_O output features, the sensor number Y, is_cp, assigned and cid.
// It also checks that the latency is the same for every event (deterministic timing),
// that back-to-back events leave back to back (one event per NMAX/PAR cycles, no stall),
// and that no FIFO overflows. Each mechanism is counted and a mechanism that never
// occurred counts as a failure: back-to-back events, gaps, padded events, events with
// fewer than K points, combine buffering, condensation seeds and noise points.
module tb_pcn_top;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int N = 32, PAR = 2, W = 8, BEATS = N / PAR;
  localparam int D_I = 5, D_1 = 16, D_2 = 32, D_S = 6, D_F = 8, D_O = 9, K = 8, Y_W = 16;
  localparam int NEV = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pcyc = 0;
  always @(posedge clk) pcyc <= pcyc + 1;

  ctrl_t in_ctrl, out_ctrl;
  logic signed [W-1:0] in_x [PAR][D_I];
  logic [Y_W-1:0] in_y [PAR];
  logic signed [W-1:0] out_feat [PAR][D_O];
  logic [Y_W-1:0] out_y [PAR];
  logic [PAR-1:0] out_is_cp, out_assigned;
  logic [4:0] out_cid [PAR];
  logic overflow;
  // Thresholds for the untrained (pseudo-random) weights: beta > 0, distance < 1.0.
  logic signed [W-1:0] cfg_t_beta = 8'sd0;
  logic [17:0] cfg_t_d2 = 18'd256;

  pcn_top dut (.*);

  mat_t ev_out [NEV];
  mat_t ev_y [NEV];
  bit   ev_cp [NEV][];
  bit   ev_as [NEV][];
  int   ev_cid [NEV][];
  int   nodes_of [NEV];
  int   first_in [NEV];
  int   gaps [NEV] = '{0, 0, 0, 0, 7, 0, 0, 40, 0, 0, 3, 0};
  int   nlist [NEV] = '{32, 20, 5, 32, 13, 1, 27, 32, 8, 31, 17, 24};
  int   out_beats = 0, prev_out = -1, latency0 = -1;
  // mechanism counters
  int   n_b2b = 0, n_gap = 0, n_padded = 0, n_few = 0, n_buffered = 0, n_cp = 0, n_noise = 0;

  function automatic mat_t network_ref(mat_t x, int nodes);
    mat_t d0, d1, s1, f1, g1, d2, d3, d4, s2, f2, g2, d5, d6, d7;
    d0 = dense_ref(x, 10, D_I, D_I, W, 1'b1);
    d1 = dense_ref(x, 11, D_I, D_1, W, 1'b1);
    s1 = dense_ref(d1, 12, D_1, D_S, W, 1'b0);
    f1 = dense_ref(d1, 13, D_1, D_F, W, 1'b0);
    g1 = gravnet_ref(s1, f1, f1, nodes, K, W);
    d2 = dense_ref(concat(g1, d1), 14, 3 * D_F + D_1, D_2, W, 1'b1);
    d3 = dense_ref(d2, 15, D_2, D_1, W, 1'b1);
    d4 = dense_ref(d3, 16, D_1, D_1, W, 1'b1);
    s2 = dense_ref(d4, 17, D_1, D_S, W, 1'b0);
    f2 = dense_ref(d4, 18, D_1, D_F, W, 1'b0);
    g2 = gravnet_ref(s2, f2, f2, nodes, K, W);
    d5 = dense_ref(concat(g2, d4), 19, 3 * D_F + D_1, D_2, W, 1'b1);
    d6 = dense_ref(d5, 20, D_2, D_1, W, 1'b1);
    d7 = dense_ref(concat(concat(d6, d3), d0), 21, 2 * D_1 + D_I, D_1, W, 1'b1);
    return dense_ref(d7, 22, D_1, D_O, W, 1'b0);
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_ctrl = '0;
    in_x = '{default: '0};
    in_y = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < NEV; e++) begin
      mat_t x, yv;
      x = {};
      yv = {};
      nodes_of[e] = nlist[e];
      for (int i = 0; i < N; i++) begin
        row_t r, ry;
        r = {};
        ry = {};
        for (int k = 0; k < D_I; k++) r.push_back((i < nlist[e]) ? int'($urandom_range(0, 128)) - 64 : 0);
        ry.push_back((i < nlist[e]) ? int'($urandom_range(0, 8735)) : 0);
        x.push_back(r);
        yv.push_back(ry);
      end
      ev_out[e] = network_ref(x, nlist[e]);
      ev_y[e] = yv;
      cps_ref(ev_out[e], nlist[e], 2, int'(cfg_t_beta), longint'(cfg_t_d2), ev_cp[e], ev_as[e], ev_cid[e]);
      if (nlist[e] < N) n_padded++;
      if (nlist[e] < K) n_few++;
      if (e > 0) begin
        if (gaps[e] == 0) n_b2b++;
        else n_gap++;
      end
      repeat (gaps[e]) begin
        @(negedge clk);
        in_ctrl = '0;
      end
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_ctrl.valid = 1'b1;
        in_ctrl.last = (b == BEATS - 1);
        in_ctrl.nodes = nodes_t'(nlist[e]);
        for (int l = 0; l < PAR; l++) begin
          for (int k = 0; k < D_I; k++) in_x[l][k] = W'(x[b*PAR+l][k]);
          in_y[l] = Y_W'(yv[b*PAR+l][0]);
        end
        if (b == 0) first_in[e] = pcyc;
      end
    end
    @(negedge clk);
    in_ctrl = '0;
    while (out_beats < NEV * BEATS && pcyc < first_in[NEV-1] + 400) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (out_beats != NEV * BEATS || overflow) begin
      failures++;
      $display("got %0d output beats, overflow %0d", out_beats, overflow);
    end
    $display("latency %0d cycles (first input beat to first output beat), %0d cycles per event",
             latency0, BEATS);
    $display("mechanisms: back-to-back %0d, gaps %0d, padded %0d, fewer-than-K %0d, combine-buffered %0d, seeds %0d, noise %0d",
             n_b2b, n_gap, n_padded, n_few, n_buffered, n_cp, n_noise);
    checks++; if (n_b2b == 0) failures++;
    checks++; if (n_gap == 0) failures++;
    checks++; if (n_padded == 0) failures++;
    checks++; if (n_few == 0) failures++;
    checks++; if (n_buffered == 0) failures++;
    checks++; if (n_cp == 0) failures++;
    checks++; if (n_noise == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Combine buffering: the skip branch of the first join waits in its FIFO.
  always @(negedge clk) if (rst_n && dut.u_c1.u_fifo_b.count > 1) n_buffered++;

  always @(negedge clk) begin
    if (rst_n && out_ctrl.valid) begin
      int e, b;
      e = out_beats / BEATS;
      b = out_beats % BEATS;
      checks++;
      if (b == 0) begin
        if (latency0 < 0) latency0 = pcyc - first_in[e];
        if (pcyc - first_in[e] != latency0) begin
          failures++;
          $display("event %0d: latency %0d differs from %0d", e, pcyc - first_in[e], latency0);
        end
        if (e > 0 && gaps[e] == 0 && pcyc != prev_out + 1) begin
          failures++;
          $display("event %0d: back-to-back event did not leave back to back", e);
        end
      end else if (pcyc != prev_out + 1) begin
        failures++;
        $display("event %0d beat %0d not consecutive", e, b);
      end
      checks++;
      if (out_ctrl.last != (b == BEATS - 1) || int'(out_ctrl.nodes) != nodes_of[e]) failures++;
      for (int l = 0; l < PAR; l++) begin
        int r;
        r = b * PAR + l;
        for (int d = 0; d < D_O; d++) begin
          checks++;
          if (int'(out_feat[l][d]) != ev_out[e][r][d]) begin
            failures++;
            if (failures < 20) $display("event %0d row %0d feature %0d: got %0d exp %0d", e, r, d,
                                        out_feat[l][d], ev_out[e][r][d]);
          end
        end
        checks++;
        if (int'(out_y[l]) != ev_y[e][r][0]) failures++;
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
