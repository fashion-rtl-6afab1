// tb_fashion_mesh_full: the end-to-end test of mesh_env on the default
// 8x8 Fashion mesh (no parameter override), one hand-made and one random
// fault scenario.
module tb_fashion_mesh_full;
  mesh_env #(.R(8), .C(8), .FULL(1), .NSCEN(2), .NPKT(100), .WATCHDOG(2000000)) u_env ();
endmodule
