// Mechanism counters of an encoder block instance "dut", shared by the encoder-block
// testbenches (included inside the testbench module).
int    mech [9];
string mech_name [9];
initial begin
  mech_name[0] = "ping-pong bank swap";
  mech_name[1] = "LayerNorm block aligned";
  mech_name[2] = "LayerNorm block flushed";
  mech_name[3] = "softmax padding lane";
  mech_name[4] = "GELU LUT lane";
  mech_name[5] = "GELU ReLU lane";
  mech_name[6] = "GELU zero lane";
  mech_name[7] = "Q waits for K and V";
  mech_name[8] = "output back-pressure";
  for (int k = 0; k < 9; k++) mech[k] = 0;
end
always @(posedge clk) if (rst_n) begin
  mech[0] = int'(dut.pp_swaps);
  if (dut.u_ln1.state == 1 && dut.u_ln1.al_shift) mech[1]++;
  if (dut.u_ln1.state == 1 && dut.u_ln1.al_flush) mech[2]++;
  if (dut.g_head[0].u_softmax.in_valid && dut.g_head[0].u_softmax.in_ready)
    mech[3] += 16 - $countones(dut.g_head[0].u_softmax.valid_lane);
  if (dut.g_valid && dut.g_ready)
    for (int i = 0; i < 16; i++) begin
      if (dut.g_blk.man[i] != 0 && dut.u_gelu.out_path[i] == 2'd0) mech[4]++;
      if (dut.u_gelu.out_path[i] == 2'd1) mech[5]++;
      if (dut.u_gelu.out_path[i] == 2'd2) mech[6]++;
    end
  if (dut.g_head[0].qf_valid && !(dut.g_head[0].k_done && dut.g_head[0].v_done)) mech[7]++;
  if (o_valid && !o_ready) mech[8]++;
end
