// host_interface: bridge between the host processor and the accelerator.
//
// The host talks over a 16-bit full-duplex parallel bus: data_in words qualified by start and
// accepted when ready is high, and data_out words qualified by dout_valid. A transfer is a
// header word {cmd[15:12], arg[11:0]} followed by its payload (commands in genesis_pkg::cmd_e):
//   CMD_CFG  write configuration register arg with the next word
//   CMD_MWR  write arg 32-bit words to SRAM: addr[16], addr[15:0], then {hi, lo} per word
//   CMD_MRD  read arg 32-bit words from SRAM: addr[16], addr[15:0]; returns {hi, lo} per word
//   CMD_SPK  arg words of input spikes for the next time step (word k = neurons 16k..16k+15)
//   CMD_LBL  one word of label spikes for the output neurons
//   CMD_RUN  run the phases flagged in arg[3:0] = {meta, update, backward, forward}
//   CMD_OUT  return one word with the output spikes of the last forward step
// SRAM addresses are global word addresses; consecutive addresses fall in consecutive banks.
// The bus width and the signal names Clk, Start, Ready, Data in, Data out follow the paper; the
// framing, dout_valid and the command set are this design's choices.
//
// Timing: one word per cycle in each direction; ready is low while the control unit runs a
// phase and while read data is being returned.
module host_interface
  import genesis_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  logic        start,
  output logic        ready,
  input  logic [15:0] data_in,
  output logic [15:0] data_out,
  output logic        dout_valid,
  // accelerator side
  output logic        cfg_we,
  output logic [3:0]  cfg_addr,
  output logic [15:0] cfg_data,
  output logic        mem_we,
  output logic        mem_re,
  output logic [GAW-1:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  output logic        spk_we,
  output logic [3:0]  spk_widx,
  output logic [15:0] spk_data,
  output logic        lbl_we,
  output logic [15:0] lbl_data,
  output logic        run,
  output logic [3:0]  run_flags,
  input  logic        busy,
  input  logic [15:0] out_spikes
);
  typedef enum logic [3:0] {
    S_HDR, S_CFG, S_AHI, S_ALO, S_DHI, S_DLO, S_RREQ, S_RWAIT, S_RLO,
    S_SPK, S_LBL, S_RUN, S_RUNW
  } st_e;

  st_e         st;
  cmd_e        cmd;
  logic [11:0] cnt;
  logic [15:0] hi;
  logic [31:0] rbuf;
  logic        acc_in;
  logic [3:0]  spk_n;

  always_comb begin
    unique case (st)
      S_HDR, S_CFG, S_AHI, S_ALO, S_DHI, S_DLO, S_SPK, S_LBL: ready = !busy;
      default: ready = 1'b0;
    endcase
  end
  assign acc_in = start && ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_HDR; cmd <= CMD_NOP; spk_n <= '0; cnt <= '0; hi <= '0; rbuf <= '0;
      cfg_we <= 1'b0; cfg_addr <= '0; cfg_data <= '0;
      mem_we <= 1'b0; mem_re <= 1'b0; mem_addr <= '0; mem_wdata <= '0;
      spk_we <= 1'b0; spk_widx <= '0; spk_data <= '0;
      lbl_we <= 1'b0; lbl_data <= '0; run <= 1'b0; run_flags <= '0;
      data_out <= '0; dout_valid <= 1'b0;
    end else begin
      cfg_we <= 1'b0; mem_we <= 1'b0; mem_re <= 1'b0; spk_we <= 1'b0; lbl_we <= 1'b0;
      run <= 1'b0; dout_valid <= 1'b0;
      unique case (st)
        S_HDR: if (acc_in) begin
          cmd <= cmd_e'(data_in[15:12]);
          cnt <= data_in[11:0];
          unique case (cmd_e'(data_in[15:12]))
            CMD_CFG: begin cfg_addr <= data_in[3:0]; st <= S_CFG; end
            CMD_MWR, CMD_MRD: st <= S_AHI;
            CMD_SPK: begin spk_n <= '0; if (data_in[11:0] != 0) st <= S_SPK; end
            CMD_LBL: st <= S_LBL;
            CMD_RUN: begin run_flags <= data_in[3:0]; st <= S_RUN; end
            CMD_OUT: begin data_out <= out_spikes; dout_valid <= 1'b1; end
            default: ;
          endcase
        end
        S_CFG: if (acc_in) begin cfg_we <= 1'b1; cfg_data <= data_in; st <= S_HDR; end
        S_AHI: if (acc_in) begin mem_addr[GAW-1:16] <= data_in[GAW-17:0]; st <= S_ALO; end
        S_ALO: if (acc_in) begin
          mem_addr[15:0] <= data_in;
          if (cnt == 0)            st <= S_HDR;
          else if (cmd == CMD_MWR) st <= S_DHI;
          else                     st <= S_RREQ;
        end
        S_DHI: if (acc_in) begin hi <= data_in; st <= S_DLO; end
        S_DLO: if (acc_in) begin
          // address is advanced after the write has been issued
          mem_we <= 1'b1; mem_wdata <= {hi, data_in};
          cnt <= cnt - 1'b1;
          st  <= (cnt == 1) ? S_HDR : S_DHI;
        end
        S_RREQ: begin mem_re <= 1'b1; st <= S_RWAIT; end
        S_RWAIT: if (mem_rvalid) begin
          rbuf <= mem_rdata; data_out <= mem_rdata[31:16]; dout_valid <= 1'b1; st <= S_RLO;
        end
        S_RLO: begin
          data_out <= rbuf[15:0]; dout_valid <= 1'b1;
          cnt <= cnt - 1'b1; mem_addr <= mem_addr + 1'b1;
          st <= (cnt == 1) ? S_HDR : S_RREQ;
        end
        S_SPK: if (acc_in) begin
          spk_we <= 1'b1; spk_data <= data_in; spk_widx <= spk_n;
          spk_n  <= spk_n + 1'b1;
          cnt <= cnt - 1'b1;
          if (cnt == 1) st <= S_HDR;
        end
        S_LBL: if (acc_in) begin lbl_we <= 1'b1; lbl_data <= data_in; st <= S_HDR; end
        S_RUN: begin run <= 1'b1; st <= S_RUNW; end
        S_RUNW: if (!run && !busy) st <= S_HDR;
        default: st <= S_HDR;
      endcase
      // advance the write address one cycle after each write
      if (mem_we) mem_addr <= mem_addr + 1'b1;
    end
  end
endmodule
