// tb_pcn_combine: self-checking testbench of the Combine topology element.
// Stream A and stream B carry the same sequence of beats; B is delayed against A by a
// random amount per phase (first A later than B, then B later than A). Every output beat
// must be the concatenation {A, B} of the same sequence number and must appear exactly
// two cycles after the later of its two input beats.
module tb_pcn_combine;
  import pcn_pkg::*;

  localparam int PAR = 2, W = 8, DA = 3, DB = 2, NB = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ctrl_t a_ctrl, b_ctrl, out_ctrl;
  logic signed [W-1:0] a_data [PAR][DA];
  logic signed [W-1:0] b_data [PAR][DB];
  logic signed [W-1:0] out_data [PAR][DA+DB];
  logic overflow;

  pcn_combine #(.PAR(PAR), .DATA_W(W), .D_A(DA), .D_B(DB), .DEPTH(16)) dut (.*);

  // beat n: a feature f of lane l = n*16 + l*4 + f (mod 256), b feature = -(...)
  function automatic logic signed [W-1:0] av(int n, int l, int f); return W'(n * 7 + l * 3 + f); endfunction
  function automatic logic signed [W-1:0] bv(int n, int l, int f); return W'(-(n * 5) + l * 11 + f * 2); endfunction

  int a_cnt = 0, b_cnt = 0, o_cnt = 0;
  int a_time [NB], b_time [NB];
  int cyc = 0;
  int pcyc = 0;
  always @(posedge clk) pcyc <= pcyc + 1;
  int delay_b;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive
  initial begin
    a_ctrl = '0; b_ctrl = '0;
    a_data = '{default: '0}; b_data = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (o_cnt < NB) begin
      @(negedge clk);
      cyc++;
      // phase 1: A runs 6 cycles late; phase 2: B runs 9 cycles late (beats 20..)
      a_ctrl = '0; b_ctrl = '0;
      if (a_cnt < NB && ((a_cnt < 20) ? (cyc > 6) : (a_cnt <= b_cnt))) begin
        a_ctrl.valid = 1'b1;
        a_ctrl.last  = (a_cnt % 4) == 3;
        a_ctrl.nodes = nodes_t'(a_cnt);
        for (int l = 0; l < PAR; l++) for (int f = 0; f < DA; f++) a_data[l][f] = av(a_cnt, l, f);
        a_time[a_cnt] = pcyc;
        a_cnt++;
      end
      if (b_cnt < NB && ((b_cnt < 20) ? 1'b1 : (cyc > a_time[20] + 9 && b_cnt < a_cnt))) begin
        if (b_cnt < 20 || $urandom_range(0, 3) != 0) begin
          b_ctrl.valid = 1'b1;
          for (int l = 0; l < PAR; l++) for (int f = 0; f < DB; f++) b_data[l][f] = bv(b_cnt, l, f);
          b_time[b_cnt] = pcyc;
          b_cnt++;
        end
      end
    end
    @(negedge clk);
    checks++;
    if (overflow) begin
      failures++;
      $display("unexpected overflow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check
  always @(negedge clk) begin
    if (rst_n && out_ctrl.valid) begin
      int later;
      later = (a_time[o_cnt] > b_time[o_cnt]) ? a_time[o_cnt] : b_time[o_cnt];
      checks++;
      if (pcyc != later + 2) begin
        failures++;
        $display("beat %0d: out at %0d, inputs complete at %0d", o_cnt, pcyc, later);
      end
      checks++;
      if (out_ctrl.nodes != nodes_t'(o_cnt) || out_ctrl.last != ((o_cnt % 4) == 3)) begin
        failures++;
        $display("beat %0d: ctrl wrong", o_cnt);
      end
      for (int l = 0; l < PAR; l++) begin
        for (int f = 0; f < DA; f++) begin
          checks++;
          if (out_data[l][f] != av(o_cnt, l, f)) begin
            failures++;
            $display("beat %0d lane %0d A%0d wrong", o_cnt, l, f);
          end
        end
        for (int f = 0; f < DB; f++) begin
          checks++;
          if (out_data[l][DA+f] != bv(o_cnt, l, f)) begin
            failures++;
            $display("beat %0d lane %0d B%0d wrong", o_cnt, l, f);
          end
        end
      end
      o_cnt++;
    end
  end
endmodule
