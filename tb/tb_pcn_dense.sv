// tb_pcn_dense: self-checking testbench of the dense/linear point processing element.
// Drives random beats (with gaps) into a ReLU dense instance and a linear instance and
// compares every output beat, exactly two cycles later, with the reference model in
// pcn_ref_pkg. Also checks that the control record (valid, last, nodes) is delayed along.
module tb_pcn_dense;
  import pcn_pkg::*;
  import pcn_ref_pkg::*;

  localparam int PAR = 2, W = 8, DI = 5, DO = 7, LAT = 2, NCYC = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ctrl_t in_ctrl, o1_ctrl, o2_ctrl;
  logic signed [W-1:0] in_data [PAR][DI];
  logic signed [W-1:0] o1 [PAR][DO];
  logic signed [W-1:0] o2 [PAR][DO];

  pcn_dense #(.PAR(PAR), .DATA_W(W), .D_IN(DI), .D_OUT(DO), .SEED(3), .RELU(1'b1)) dut_relu (
    .clk, .rst_n, .in_ctrl, .in_data, .out_ctrl(o1_ctrl), .out_data(o1));
  pcn_dense #(.PAR(PAR), .DATA_W(W), .D_IN(DI), .D_OUT(DO), .SEED(4), .RELU(1'b0)) dut_lin (
    .clk, .rst_n, .in_ctrl, .in_data, .out_ctrl(o2_ctrl), .out_data(o2));

  ctrl_t hist_c [NCYC];
  mat_t  exp1 [NCYC];
  mat_t  exp2 [NCYC];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_ctrl = '0;
    in_data = '{default: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      mat_t x;
      x = {};
      @(negedge clk);
      // check outputs of the beat driven LAT cycles ago
      if (t >= LAT) begin
        checks++;
        if (o1_ctrl != hist_c[t-LAT] || o2_ctrl != hist_c[t-LAT]) begin
          failures++;
          $display("ctrl mismatch at %0d", t);
        end
        if (hist_c[t-LAT].valid) begin
          for (int l = 0; l < PAR; l++)
            for (int o = 0; o < DO; o++) begin
              checks += 2;
              if (int'(o1[l][o]) != exp1[t-LAT][l][o]) begin
                failures++;
                $display("relu lane %0d out %0d: got %0d exp %0d", l, o, o1[l][o], exp1[t-LAT][l][o]);
              end
              if (int'(o2[l][o]) != exp2[t-LAT][l][o]) begin
                failures++;
                $display("lin lane %0d out %0d: got %0d exp %0d", l, o, o2[l][o], exp2[t-LAT][l][o]);
              end
            end
        end
      end
      in_ctrl.valid = (t < NCYC - LAT) && ($urandom_range(0, 3) != 0);
      in_ctrl.last  = in_ctrl.valid && 1'($urandom_range(0, 1));
      in_ctrl.nodes = nodes_t'($urandom_range(1, 32));
      for (int l = 0; l < PAR; l++) begin
        row_t r;
        r = {};
        for (int i = 0; i < DI; i++) begin
          in_data[l][i] = W'($urandom);
          r.push_back(int'(in_data[l][i]));
        end
        x.push_back(r);
      end
      hist_c[t] = in_ctrl;
      exp1[t] = dense_ref(x, 3, DI, DO, W, 1'b1);
      exp2[t] = dense_ref(x, 4, DI, DO, W, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
