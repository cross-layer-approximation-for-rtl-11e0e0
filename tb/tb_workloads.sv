// tb_workloads: builds every model topology of the evaluated benchmark set
// (Cardiotocography, Pendigits, RedWine, WhiteWine) with approximated
// placeholder coefficients and checks each against a reference model.
//
//   MLP-C  Cardio 21-3-3, Pendigits 16-5-10, RedWine 11-2-6, WhiteWine 11-4-7
//   MLP-R  Cardio 21-3-1, RedWine 11-2-1, WhiteWine 11-4-1
//   SVM-C  Cardio 3 classes (3 classifiers), Pendigits 10 (45),
//          RedWine 6 (15), WhiteWine 7 (21)
//   SVM-R  Cardio 21 inputs, RedWine 11, WhiteWine 11
//
// The trained models are not available, so this shows that each topology
// builds, approximates its coefficients and computes correctly; it says
// nothing about accuracy.
module tb_workloads;
  localparam int NW = 14;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  logic done [NW];
  int   chk  [NW];
  int   fl   [NW];

  wl_mlp_check #(.N_IN(21), .N_HID(3), .N_OUT(3),  .SEED(100)) u_card_mlpc (clk, start, done[0],  chk[0],  fl[0]);
  wl_mlp_check #(.N_IN(16), .N_HID(5), .N_OUT(10), .SEED(110)) u_pend_mlpc (clk, start, done[1],  chk[1],  fl[1]);
  wl_mlp_check #(.N_IN(11), .N_HID(2), .N_OUT(6),  .SEED(120)) u_rw_mlpc   (clk, start, done[2],  chk[2],  fl[2]);
  wl_mlp_check #(.N_IN(11), .N_HID(4), .N_OUT(7),  .SEED(130)) u_ww_mlpc   (clk, start, done[3],  chk[3],  fl[3]);
  wl_mlp_check #(.N_IN(21), .N_HID(3), .N_OUT(1),  .SEED(140)) u_card_mlpr (clk, start, done[4],  chk[4],  fl[4]);
  wl_mlp_check #(.N_IN(11), .N_HID(2), .N_OUT(1),  .SEED(150)) u_rw_mlpr   (clk, start, done[5],  chk[5],  fl[5]);
  wl_mlp_check #(.N_IN(11), .N_HID(4), .N_OUT(1),  .SEED(160)) u_ww_mlpr   (clk, start, done[6],  chk[6],  fl[6]);
  wl_svm_check #(.N_IN(21), .C(3),  .SEED(200)) u_card_svmc (clk, start, done[7],  chk[7],  fl[7]);
  wl_svm_check #(.N_IN(16), .C(10), .SEED(210)) u_pend_svmc (clk, start, done[8],  chk[8],  fl[8]);
  wl_svm_check #(.N_IN(11), .C(6),  .SEED(220)) u_rw_svmc   (clk, start, done[9],  chk[9],  fl[9]);
  wl_svm_check #(.N_IN(11), .C(7),  .SEED(230)) u_ww_svmc   (clk, start, done[10], chk[10], fl[10]);
  wl_svm_check #(.N_IN(21), .C(1),  .SEED(240)) u_card_svmr (clk, start, done[11], chk[11], fl[11]);
  wl_svm_check #(.N_IN(11), .C(1),  .SEED(250)) u_rw_svmr   (clk, start, done[12], chk[12], fl[12]);
  wl_svm_check #(.N_IN(11), .C(1),  .SEED(260)) u_ww_svmr   (clk, start, done[13], chk[13], fl[13]);

  int checks   = 0;
  int failures = 0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (2) @(posedge clk);
    start = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int k = 0; k < NW; k++) if (!done[k]) all_done = 1'b0;
    end while (!all_done);
    for (int k = 0; k < NW; k++) begin
      $display("workload %0d: checks %0d failures %0d", k, chk[k], fl[k]);
      checks   += chk[k];
      failures += fl[k];
      if (chk[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
