// tb_pcn_gravnet: self-checking testbench of the GraVNetConv graph processing element.
// Sends five events of random learned coordinates S and features F/P, with different
// point counts (fewer than K, typical, full), the first three back to back and the rest
// after gaps. Every output row is compared with the reference GraVNetConv
// ({P, max of exp(-d)*F, sum of exp(-d)*F} over the K nearest existing points).
// Timing checks: the first output beat of each event appears exactly 7 + clog2(NMAX/K)
// cycles after the event's last input beat (9 here), and the beats of an event leave on
// consecutive cycles, so back-to-back events are processed at one event per NMAX/PAR
// cycles without a stall.
module tb_pcn_gravnet;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int N = 32, PAR = 2, W = 8, DS = 6, DF = 8, K = 8;
  localparam int BEATS = N / PAR, NEV = 5, LATENCY = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pcyc = 0;
  always @(posedge clk) pcyc <= pcyc + 1;

  ctrl_t in_ctrl, out_ctrl;
  logic signed [W-1:0] s_data [PAR][DS];
  logic signed [W-1:0] f_data [PAR][DF];
  logic signed [W-1:0] p_data [PAR][DF];
  logic signed [W-1:0] out_data [PAR][3*DF];

  pcn_gravnet #(.NMAX(N), .PAR(PAR), .DATA_W(W), .D_S(DS), .D_F(DF), .K(K)) dut (.*);

  mat_t exp_rows [NEV];
  int   nodes_of [NEV];
  int   last_in  [NEV];
  int   gaps [NEV] = '{0, 0, 0, 5, 23};
  int   out_beats = 0;
  int   prev_out = -1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int nlist [NEV] = '{32, 20, 5, 1, 27};
    in_ctrl = '0;
    s_data = '{default: '0};
    f_data = '{default: '0};
    p_data = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < NEV; e++) begin
      mat_t s, f, p;
      s = {}; f = {}; p = {};
      nodes_of[e] = nlist[e];
      for (int i = 0; i < N; i++) begin
        row_t rs, rf, rp;
        rs = {}; rf = {}; rp = {};
        for (int k = 0; k < DS; k++) rs.push_back((i < nlist[e]) ? $urandom_range(0, 40) - 20 : 0);
        for (int k = 0; k < DF; k++) rf.push_back(int'($urandom_range(0, 255)) - 128);
        for (int k = 0; k < DF; k++) rp.push_back(int'($urandom_range(0, 255)) - 128);
        s.push_back(rs); f.push_back(rf); p.push_back(rp);
      end
      exp_rows[e] = gravnet_ref(s, f, p, nlist[e], K, W);
      repeat (gaps[e]) begin
        @(negedge clk);
        in_ctrl = '0;
      end
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_ctrl.valid = 1'b1;
        in_ctrl.last  = (b == BEATS - 1);
        in_ctrl.nodes = nodes_t'(nlist[e]);
        for (int l = 0; l < PAR; l++) begin
          for (int k = 0; k < DS; k++) s_data[l][k] = W'(s[b*PAR+l][k]);
          for (int k = 0; k < DF; k++) f_data[l][k] = W'(f[b*PAR+l][k]);
          for (int k = 0; k < DF; k++) p_data[l][k] = W'(p[b*PAR+l][k]);
        end
        last_in[e] = pcyc;
      end
    end
    @(negedge clk);
    in_ctrl = '0;
    repeat (40) @(negedge clk);
    checks++;
    if (out_beats != NEV * BEATS) begin
      failures++;
      $display("got %0d output beats, expected %0d", out_beats, NEV * BEATS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_ctrl.valid) begin
      int e, b;
      e = out_beats / BEATS;
      b = out_beats % BEATS;
      checks++;
      if (b == 0 && pcyc != last_in[e] + LATENCY) begin
        failures++;
        $display("event %0d: first output at %0d, last input at %0d", e, pcyc, last_in[e]);
      end
      if (b != 0 && pcyc != prev_out + 1) begin
        failures++;
        $display("event %0d beat %0d not consecutive", e, b);
      end
      checks++;
      if (out_ctrl.last != (b == BEATS - 1) || int'(out_ctrl.nodes) != nodes_of[e]) begin
        failures++;
        $display("event %0d beat %0d: ctrl wrong", e, b);
      end
      for (int l = 0; l < PAR; l++)
        for (int c = 0; c < 3 * DF; c++) begin
          checks++;
          if (int'(out_data[l][c]) != exp_rows[e][b*PAR+l][c]) begin
            failures++;
            if (failures < 20)
              $display("event %0d row %0d col %0d: got %0d exp %0d", e, b*PAR+l, c, out_data[l][c],
                       exp_rows[e][b*PAR+l][c]);
          end
        end
      prev_out = pcyc;
      out_beats++;
    end
  end
endmodule
