// tb_if_neuron: checks the integrate-and-fire primitive in its three uses.
//
//   u_ideal  stateful, beta = 1, threshold 4: random currents 0..7; the model
//            integrates, fires at V >= 4 and subtracts 4 (soft reset). The
//            run also checks the conservation the soft reset gives: spikes x
//            threshold + final residue = total injected charge.
//   u_leaky  stateful, beta = 0.5 (128/256), threshold 4: the potential is
//            halved (floor) before each new current is added.
//   u_spat   spatial (stateless) neuron: spike = I >= 3 in the same step,
//            whatever happened before.
// A reset in the middle of the run must clear both registers.
`timescale 1ns/1ps
module tb_if_neuron;
  logic clk = 1'b0, rst_n = 1'b0, step = 1'b0;
  logic signed [7:0] i_cur;
  logic s_ideal, s_leaky, s_spat;
  logic signed [7:0] v_ideal, v_leaky, v_spat;
  int checks = 0, failures = 0;
  int m_ideal = 0, m_leaky = 0, total_in = 0, n_spikes = 0;

  always #5 clk = ~clk;

  if_neuron #(.VW(8), .VTH(4), .STATEFUL(1'b1)) u_ideal (
    .clk, .rst_n, .step, .i_cur, .spike(s_ideal), .v_mem(v_ideal));
  if_neuron #(.VW(8), .VTH(4), .BETA_NUM(128), .BETA_SHIFT(8), .STATEFUL(1'b1)) u_leaky (
    .clk, .rst_n, .step, .i_cur, .spike(s_leaky), .v_mem(v_leaky));
  if_neuron #(.VW(8), .VTH(3), .STATEFUL(1'b0)) u_spat (
    .clk, .rst_n, .step, .i_cur, .spike(s_spat), .v_mem(v_spat));

  task automatic expect_eq(input string what, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures <= 10) $display("MISMATCH %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vi, vl, sp;
    i_cur = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t == 200) begin
        // Mid-run reset clears the membranes.
        // With zero input the outputs show the stored potential directly.
        i_cur = '0;
        rst_n = 1'b0; #1; rst_n = 1'b1; #1;
        expect_eq("ideal after reset", int'(v_ideal), 0);
        expect_eq("leaky after reset", int'(v_leaky), 0);
        m_ideal = 0; m_leaky = 0; total_in = 0; n_spikes = 0;
      end
      i_cur = 8'($urandom_range(0, 7));
      step  = ($urandom_range(0, 9) != 0);
      #1;
      // Ideal IF model.
      vi = m_ideal + int'(i_cur);
      sp = (vi >= 4);
      expect_eq("ideal spike", int'(s_ideal), sp);
      expect_eq("ideal v", int'(v_ideal), sp ? vi - 4 : vi);
      // Leaky model, beta = 1/2 with floor.
      vl = (m_leaky >>> 1) + int'(i_cur);
      expect_eq("leaky spike", int'(s_leaky), int'(vl >= 4));
      expect_eq("leaky v", int'(v_leaky), (vl >= 4) ? vl - 4 : vl);
      // Spatial neuron.
      expect_eq("spatial spike", int'(s_spat), int'(int'(i_cur) >= 3));
      if (step) begin
        m_ideal  = sp ? vi - 4 : vi;
        m_leaky  = (vl >= 4) ? vl - 4 : vl;
        total_in += int'(i_cur);
        n_spikes += sp;
      end
    end
    @(negedge clk);
    // Soft reset conserves charge: nothing is lost on firing. With zero input
    // the stored residue is v_mem plus one threshold if the neuron fires.
    i_cur = '0;
    #1;
    expect_eq("charge conservation", n_spikes * 4 + int'(v_ideal) + (s_ideal ? 4 : 0), total_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
