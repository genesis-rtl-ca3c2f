// tb_split_mnist: the domain-incremental Split-MNIST training schedule on the 256-200-2
// network, with synthetic digits.
//
// Ten "digits" are fixed random 16x16 binary images (about a quarter of the pixels on); the
// real handwritten digits are not available to a self-contained testbench, so the images only
// stand in for them in size and sparsity. The digits are taught in NTASKS tasks of two classes,
// task k holding digits 2k and 2k+1. The two output neurons are shared by all tasks (domain-
// incremental): the even digit of every task is labelled output 0, the odd digit output 1, and
// the chip is never told that the task has changed. Each image is rate coded for NT time steps
// (an "on" pixel spikes with probability 3/4, an "off" pixel with probability 1/32) and trained
// with forward, backward and update phases; its last time step adds the metaplasticity sweep.
//
// Every time step is compared word by word with the model in genesis_tb_env.svh, and the
// activity counters are compared at the end. The latency of each image (all its time steps,
// meta sweep included) is checked against 10 ms at the 10 MHz clock, 100,000 cycles. The number
// of time steps per image and the meta sweep once per image are this testbench's choices.
module tb_split_mnist;
  localparam int NIN = 256, NHID = 200, NOUTN = 2;
  localparam int NTASKS = 5, IMGS = 2, NT = 4;     // tasks, images per class, time steps per image
  localparam int BUDGET = 100000;                  // 10 ms at 10 MHz

  `include "genesis_tb_env.svh"

  logic [255:0] digit [10];

  initial begin
    int cycles, img_cycles, worst;
    worst = 0;
    for (int d = 0; d < 10; d++)
      for (int p = 0; p < 256; p++) digit[d][p] = ($urandom_range(0, 3) == 0);
    reset_and_setup();
    use_fixed = 1;
    use_label = 1;
    for (int task_k = 0; task_k < NTASKS; task_k++) begin
      for (int n = 0; n < IMGS; n++) begin
        for (int cls = 0; cls < 2; cls++) begin
          img_cycles = 0;
          fixed_lbl = '0;
          fixed_lbl[cls] = 1'b1;
          for (int s = 0; s < NT; s++) begin
            for (int p = 0; p < NW * 16; p++)
              fixed_pat[p] = (p < 256) &&
                             (digit[2 * task_k + cls][p] ? ($urandom_range(0, 3) != 0)
                                                         : ($urandom_range(0, 31) == 0));
            time_step((s == NT - 1) ? 4'hF : 4'h7, 0, cycles);
            img_cycles += cycles;
          end
          if (img_cycles > worst) worst = img_cycles;
          expect_true($sformatf("task %0d digit %0d: %0d cycles per image exceed 10 ms",
                                task_k, 2 * task_k + cls, img_cycles), img_cycles <= BUDGET);
        end
      end
      $display("task %0d trained, cycles so far %0d", task_k, cyc);
    end
    $display("longest image: %0d cycles (%0d us at 10 MHz)", worst, worst / 10);
    check_counters();
    expect_true("no consolidated synapse", c_consol > 0);
    expect_true("no weight update", c_wupd > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 4000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
