// tb_workload_vggface: the shield at the VGGFace analyzer sizes: 8 x 8
// patches of 3 channels (192 coefficients per patch), input dictionary of
// 1000 atoms with sparsity 5, latent size 520 with 2622 atoms and sparsity
// 80, thresholds 5e-4 and 1e-4.  The image is reduced from 224 x 224 to
// 32 x 32 (a 4 x 4 mask instead of 28 x 28) to keep the simulation short;
// every per-patch and per-feature size is the full one.  The width of the
// penultimate layer (1024) is assumed.  Runs the end-to-end scenario of
// tb_shield_workload.
module tb_workload_vggface;
  tb_shield_workload #(.C(3), .IMG(32), .P(8), .D_M(1000), .D_LAM(5),
                       .FEAT(1024), .R(520), .F_M(2622), .F_LAM(80),
                       .D_EPS2(2097), .F_EPS2(419)) u_run ();
  // outer watchdog, behind the one in tb_shield_workload
  initial begin
    repeat (50000000) @(posedge u_run.clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
