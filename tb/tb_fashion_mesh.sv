// tb_fashion_mesh: end-to-end test of a 4x4 Fashion mesh over three fault
// scenarios (one hand-made, two random). See mesh_env for what is checked.
module tb_fashion_mesh;
  mesh_env #(.R(4), .C(4), .FULL(0), .NSCEN(3), .NPKT(60)) u_env ();
endmodule
