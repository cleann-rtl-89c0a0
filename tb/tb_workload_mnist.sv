// tb_workload_mnist: the shield at the MNIST configuration, 1 x 28 x 28
// grey images in 4 x 4 patches (7 x 7 mask), input dictionary of 1000
// atoms with sparsity 5, latent size 279 with 500 atoms and sparsity 80,
// thresholds 5e-4 and 2e-3.  The width of the penultimate layer (512) is
// assumed.  Runs the end-to-end scenario of tb_shield_workload.
module tb_workload_mnist;
  tb_shield_workload #(.C(1), .IMG(28), .P(4), .D_M(1000), .D_LAM(5),
                       .FEAT(512), .R(279), .F_M(500), .F_LAM(80),
                       .D_EPS2(2097), .F_EPS2(8389)) u_run ();
  // outer watchdog, behind the one in tb_shield_workload
  initial begin
    repeat (50000000) @(posedge u_run.clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
