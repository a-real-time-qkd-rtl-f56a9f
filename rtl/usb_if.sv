// usb_if: FPGA side of the USB 2.0 chip used in slave FIFO mode.
//
// The paper runs the classical channel through a USB chip in slave FIFO mode with
// four independent ports: two upload ports (sifting data, error-correction data), one
// download port for sifting data, and one download port shared by error-correction
// data and commands from the computer. The pin set here is that of a common
// slave-FIFO USB controller: fifoadr selects one of the chip's four FIFOs, the chip
// shows the selected FIFO's flags (flag_empty_n for a download FIFO, flag_full_n for
// an upload FIFO), a download word is on fd_i while sloe_n is low and is taken at the
// clock edge where slrd_n is low, an upload word on fd_o is written at the edge where
// slwr_n is low. Port numbering 0..3 = download sift, download EC/command, upload
// sift, upload EC is this design's.
// Scheduling (this design's choice): the ports are visited round robin; the address is
// set one cycle before any transfer so the flags settle; then up to BURST words move,
// one per clock, while the chip's flag and the local FIFO allow. Download data
// (dl_data) is fd_i passed straight through, qualified by the two valid strobes.
module usb_if #(
  parameter int unsigned BURST = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // chip pins
  output logic [1:0]  fifoadr,
  output logic        slrd_n,
  output logic        slwr_n,
  output logic        sloe_n,
  input  logic        flag_empty_n,
  input  logic        flag_full_n,
  input  logic [15:0] fd_i,
  output logic [15:0] fd_o,
  output logic        fd_oe,
  // download streams
  output logic        dl_sift_valid,
  input  logic        dl_sift_ready,
  output logic        dl_cmd_valid,
  input  logic        dl_cmd_ready,
  output logic [15:0] dl_data,
  // upload streams
  input  logic        ul_sift_valid,
  output logic        ul_sift_ready,
  input  logic [15:0] ul_sift_data,
  input  logic        ul_ec_valid,
  output logic        ul_ec_ready,
  input  logic [15:0] ul_ec_data
);
  typedef enum logic {U_SETTLE, U_XFER} ustate_e;
  ustate_e st;
  logic [$clog2(BURST+1)-1:0] cnt;
  logic do_rd, do_wr, local_ok;

  always_comb begin
    unique case (fifoadr)
      2'd0:    local_ok = dl_sift_ready;
      2'd1:    local_ok = dl_cmd_ready;
      2'd2:    local_ok = ul_sift_valid;
      default: local_ok = ul_ec_valid;
    endcase
    do_rd = (st == U_XFER) && !fifoadr[1] && flag_empty_n && local_ok;
    do_wr = (st == U_XFER) &&  fifoadr[1] && flag_full_n  && local_ok;
  end

  assign slrd_n        = !do_rd;
  assign sloe_n        = fifoadr[1];
  assign slwr_n        = !do_wr;
  assign fd_oe         = fifoadr[1];
  assign fd_o          = (fifoadr == 2'd2) ? ul_sift_data : ul_ec_data;
  assign dl_data       = fd_i;
  assign dl_sift_valid = do_rd && fifoadr == 2'd0;
  assign dl_cmd_valid  = do_rd && fifoadr == 2'd1;
  assign ul_sift_ready = do_wr && fifoadr == 2'd2;
  assign ul_ec_ready   = do_wr && fifoadr == 2'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_SETTLE; cnt <= '0; fifoadr <= 2'd0;
    end else begin
      unique case (st)
        U_SETTLE: begin
          st  <= U_XFER;
          cnt <= '0;
        end
        U_XFER: begin
          if (do_rd || do_wr) cnt <= cnt + 1'b1;
          if (!(do_rd || do_wr) || cnt == $bits(cnt)'(BURST - 1)) begin
            st      <= U_SETTLE;
            fifoadr <= fifoadr + 2'd1;
          end
        end
        default: st <= U_SETTLE;
      endcase
    end
  end
endmodule
