// tb_control_unit: test of the control unit's sequencing, through the whole chip, at a network
// size that exercises its corner cases: 40 inputs (the last spike word is only half used),
// 70 hidden neurons (two tiles, the second holding 6 neurons, and two padding columns) and 3
// output neurons (five padding columns).
//
// Part 1 checks the cycle cost of the proposed dataflow. With the threshold raised so that no
// neuron spikes, forward runs are repeated with one more active input each time. Each extra
// active input must cost exactly 9 cycles per tile of the hidden layer (8 "move weight" and
// one "accumulate" issue slots) plus 1 cycle of address encoding, and inactive inputs must
// cost nothing beyond their spike word's single cycle; spike bits beyond the last input neuron
// must be ignored.
// Part 2 runs complete training time steps and a metaplasticity pass at this size and compares
// every SRAM word with the model, including the padding words, which must never be written.
module tb_control_unit;
  localparam int NIN = 40, NHID = 70, NOUTN = 3;

  `include "genesis_tb_env.svh"

  initial begin
    int cycles, prev, j, expected_step;
    reset_and_setup();
    // ---- part 1: cycle cost per active input ----
    VTH = 32767; cfg_wr(4, VTH);
    use_fixed = 1;
    fixed_pat = '0;
    time_step(4'h1, 0, prev);
    $display("forward pass without input spikes: %0d cycles", prev);
    expected_step = 9 * T1 + 1;
    for (int n = 0; n < 12; n++) begin
      do j = $urandom_range(0, NIN - 1); while (fixed_pat[j]);
      fixed_pat[j] = 1'b1;
      time_step(4'h1, 0, cycles);
      $display("%0d active inputs: %0d cycles", n + 1, cycles);
      // The encoder takes one cycle per spike word plus one per spike. The one exception is
      // the first spike of the last word: it is encoded during the cycle in which the control
      // unit notices that all words have been fed, so it adds no cycle.
      expect_eq("cycles per added active input", cycles - prev,
                expected_step - ((j / 16 == NW - 1 && $countones(fixed_pat[j / 16 * 16 +: 16]) == 1) ? 1 : 0));
      prev = cycles;
    end
    // bits beyond the last input neuron are ignored and cost nothing
    fixed_pat[NW * 16 - 1 -: 4] = 4'hF;
    time_step(4'h1, 0, cycles);
    expect_eq("cycles with spikes beyond the layer", cycles, prev);
    expect_true("padding bits sent", c_partial_word > 0);
    // ---- part 2: training at this size ----
    use_fixed = 0;
    VTH = 96; cfg_wr(4, VTH);
    for (int s = 0; s < 8; s++) begin
      time_step((s == 7) ? 4'hF : 4'h7, 80, cycles);
      $display("time step %0d: %0d cycles", s, cycles);
    end
    check_counters();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 1000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
