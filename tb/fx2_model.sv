// fx2_model: behavioural model of a USB 2.0 controller in slave FIFO mode, as seen from
// the FPGA, with four FIFOs: 0 and 1 carry data from the host to the FPGA, 2 and 3 from
// the FPGA to the host. fifoadr selects a FIFO; flag_empty_n / flag_full_n show its
// state; the head word of a host-to-FPGA FIFO is on fd_o (to the FPGA) and is removed
// at a clock edge with slrd_n low; fd_i is written at an edge with slwr_n low.
// The host side is a plain stream per FIFO. Stands for an external chip.
module fx2_model #(
  parameter int CAP = 512
) (
  input  logic        clk,
  input  logic [1:0]  fifoadr,
  input  logic        slrd_n,
  input  logic        slwr_n,
  input  logic        sloe_n,
  output logic        flag_empty_n,
  output logic        flag_full_n,
  output logic [15:0] fd_o,
  input  logic [15:0] fd_i,
  // host side
  input  logic [1:0]  h_dl_valid,     // push into FIFO 0 / 1
  input  logic [15:0] h_dl_data [2],
  output logic [1:0]  h_ul_valid,     // FIFO 2 / 3 not empty
  output logic [15:0] h_ul_data [2],
  input  logic [1:0]  h_ul_pop
);
  logic [15:0] mem [4][CAP];
  int wp [4], rp [4];
  initial for (int i = 0; i < 4; i++) begin wp[i] = 0; rp[i] = 0; end
  always_comb begin
    flag_empty_n = (wp[fifoadr] != rp[fifoadr]);
    flag_full_n  = (wp[fifoadr] - rp[fifoadr] < CAP);
    fd_o         = (!sloe_n && flag_empty_n) ? mem[fifoadr][rp[fifoadr] % CAP] : 16'hBEEF;
    for (int i = 0; i < 2; i++) begin
      h_ul_valid[i] = wp[2+i] != rp[2+i];
      h_ul_data[i]  = mem[2+i][rp[2+i] % CAP];
    end
  end
  always @(posedge clk) begin
    if (!slrd_n && !fifoadr[1] && wp[fifoadr] != rp[fifoadr]) rp[fifoadr] <= rp[fifoadr] + 1;
    if (!slwr_n && fifoadr[1] && wp[fifoadr] - rp[fifoadr] < CAP) begin
      mem[fifoadr][wp[fifoadr] % CAP] <= fd_i;
      wp[fifoadr] <= wp[fifoadr] + 1;
    end
    for (int i = 0; i < 2; i++) begin
      if (h_dl_valid[i]) begin
        if (wp[i] - rp[i] >= CAP) $display("fx2_model: FIFO %0d overflow", i);
        mem[i][wp[i] % CAP] <= h_dl_data[i];
        wp[i] <= wp[i] + 1;
      end
      if (h_ul_pop[i] && wp[2+i] != rp[2+i]) rp[2+i] <= rp[2+i] + 1;
    end
  end
endmodule
