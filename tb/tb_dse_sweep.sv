// tb_dse_sweep: the classifier cores across the explored sizes.
//
// The design-space exploration behind the reference configurations varied
// the number of selected features from 5 to 30 in steps of 5, the precision
// over 4, 6, 8 and 10 bits and, for MLPs, the pruning ratio over 20, 50 and
// 90%. This testbench builds every core at six points that together cover
// each feature count, each precision and each sparsity, and checks 300
// predictions per point against the reference model. Every core at every
// point must predict both classes at least once.
module tb_dse_sweep;
  import stress_pkg::*;

  localparam int NPT = 6;
  localparam int NF_T [NPT] = '{5, 10, 15, 20, 25, 30};
  localparam int P_T  [NPT] = '{4, 6, 8, 10, 4, 6};
  localparam int SP_T [NPT] = '{20, 50, 90, 20, 50, 90};

  logic step = 0;
  int c_dt [NPT], f_dt [NPT], o_dt [NPT];
  int c_sv [NPT], f_sv [NPT], o_sv [NPT];
  int c_ml [NPT], f_ml [NPT], o_ml [NPT];

  for (genvar k = 0; k < NPT; k++) begin : g_pt
    dse_point #(.MODEL(MODEL_DT),  .NF(NF_T[k]), .P(P_T[k]), .SP(SP_T[k]), .SEED(500 + k))
      u_dt (.step, .checks(c_dt[k]), .failures(f_dt[k]), .ones(o_dt[k]));
    dse_point #(.MODEL(MODEL_SVM), .NF(NF_T[k]), .P(P_T[k]), .SP(SP_T[k]), .SEED(600 + k))
      u_sv (.step, .checks(c_sv[k]), .failures(f_sv[k]), .ones(o_sv[k]));
    dse_point #(.MODEL(MODEL_MLP), .NF(NF_T[k]), .P(P_T[k]), .SP(SP_T[k]), .SEED(700 + k))
      u_ml (.step, .checks(c_ml[k]), .failures(f_ml[k]), .ones(o_ml[k]));
  end

  int checks = 0, failures = 0;

  task automatic need_both(int ones, int total, string what, int k);
    checks++;
    if (ones == 0 || ones == total) begin
      failures++;
      $display("%s point %0d predicted one class only", what, k);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      #5 step = 1;
      #5 step = 0;
    end
    #5;
    for (int k = 0; k < NPT; k++) begin
      $display("NF=%0d P=%0d SP=%0d: stress predicted DT %0d/%0d, SVM %0d/%0d, MLP %0d/%0d",
               NF_T[k], P_T[k], SP_T[k], o_dt[k], c_dt[k], o_sv[k], c_sv[k], o_ml[k], c_ml[k]);
      checks   += c_dt[k] + c_sv[k] + c_ml[k];
      failures += f_dt[k] + f_sv[k] + f_ml[k];
      need_both(o_dt[k], c_dt[k], "DT", k);
      need_both(o_sv[k], c_sv[k], "SVM", k);
      need_both(o_ml[k], c_ml[k], "MLP", k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
