// tb_genesis_top: end-to-end test of the accelerator at its default size, with the paper's
// evaluation network (256 inputs = 16x16 pixels, 200 hidden, 2 output neurons).
//
// Acting as the host processor, the testbench configures the chip, initialises all synapse,
// metaplasticity, feedback and neuron-state words over the 16-bit bus and reads a few back,
// then runs NSTEPS training time steps (forward, backward, synapse update) and finishes with a
// metaplasticity update. The environment (genesis_tb_env.svh) keeps a model of the network,
// computed from the equations in plain integer arithmetic. After every time step the output
// spikes (read over the bus), every {V,I} and {Theta,T,U} word and every synapse word {M,W}
// are compared with it. At the end the chip's activity counters are compared with the model's
// counts, and a failure is counted for any mechanism that never occurred (skipped inactive
// inputs, several neuron tiles, hidden/output spikes, false-positive and false-negative error
// spikes, boxcar open and closed, weight updates, consolidated synapses, metaplasticity
// strengthened and weakened, write-back of updated synapses).
module tb_genesis_top;
  localparam int NIN = 256, NHID = 200, NOUTN = 2, NSTEPS = 6;

  `include "genesis_tb_env.svh"

  initial begin
    int cycles;
    reset_and_setup();
    // read back two words over the bus
    send({CMD_MRD, 12'd2}); send(16'd0); send(16'd7);
    wait_idle(); repeat (4) @(negedge clk);
    expect_eq("readback hi", dout_q[0], int'(16'(m1[0][7])));
    expect_eq("readback lo", dout_q[1], int'(16'(w1[0][7])));
    expect_eq("readback 2 lo", dout_q[3], int'(16'(w1[0][8])));
    dout_q.delete();
    // training time steps, about 25% of the inputs active
    for (int s = 0; s < NSTEPS; s++) begin
      time_step((s == NSTEPS - 1) ? 4'hF : 4'h7, 64, cycles);
      $display("time step %0d: %0d cycles", s, cycles);
    end
    check_counters();
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 2000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
