// cmd_proc: command processing on the shared download port.
//
// The paper's fourth USB port carries both the error-correction data and the
// commands from the single-board computer (system configuration, start/stop, test
// commands, and the PA factor computed in software). This design frames that port
// in packets: a header {type[3:0], len[11:0]} followed by len 16-bit words. Type
// PKT_EC payload is passed on to the reconciliation block; type PKT_REG payload is
// pairs {addr, data} that write the registers below (map in qkd_pkg). Other types
// are skipped and counted. Register set and framing are this design's choice; the
// registers are the settings the paper says software controls.
// Timing: one word per clock; a register takes its value the cycle after its data word.
// EC payload (ec_data) is the input word passed straight through, qualified by ec_valid.
module cmd_proc
  import qkd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  output logic        ec_valid,
  input  logic        ec_ready,
  output logic [15:0] ec_data,
  // registers
  output logic              run,
  output logic [1:0]        test_light,
  output logic              pol_req,
  output logic              pol_mode,
  output logic signed [7:0] offset,
  output logic [3:0]        seg_log2,
  output logic [15:0]       sfactor,
  output logic [63:0]       seed,
  output logic [7:0]        delay,
  output logic [15:0]       bad_packets
);
  typedef enum logic [1:0] {C_HDR, C_EC, C_ADDR, C_DATA} cstate_e;
  cstate_e     st;
  logic [11:0] left;
  logic [7:0]  addr;
  logic        skip;

  assign ec_valid = (st == C_EC) && in_valid;
  assign ec_data  = in_data;
  assign in_ready = (st == C_EC) ? ec_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_HDR; left <= '0; addr <= '0; skip <= 1'b0;
      run <= 1'b0; test_light <= '0; pol_req <= 1'b0; pol_mode <= 1'b0; offset <= '0; seg_log2 <= 4'd3;
      sfactor <= '0; seed <= 64'h1; delay <= '0; bad_packets <= '0;
    end else if (in_valid && in_ready) begin
      unique case (st)
        C_HDR: begin
          left <= in_data[11:0];
          skip <= 1'b0;
          if (in_data[11:0] != 12'd0) begin
            if (in_data[15:12] == PKT_EC) st <= C_EC;
            else begin
              st <= C_ADDR;
              if (in_data[15:12] != PKT_REG) begin
                skip <= 1'b1;
                bad_packets <= bad_packets + 1'b1;
              end
            end
          end
        end
        C_EC: begin
          left <= left - 1'b1;
          if (left == 12'd1) st <= C_HDR;
        end
        C_ADDR: begin
          addr <= in_data[7:0];
          left <= left - 1'b1;
          st   <= (left == 12'd1) ? C_HDR : C_DATA;
        end
        C_DATA: begin
          left <= left - 1'b1;
          st   <= (left == 12'd1) ? C_HDR : C_ADDR;
          if (!skip) begin
            unique case (addr)
              REG_CTRL:    begin run <= in_data[0]; test_light <= in_data[2:1];
                                 pol_req <= in_data[3]; pol_mode <= in_data[4]; end
              REG_OFFSET:  offset   <= signed'(in_data[7:0]);
              REG_SEGLOG2: seg_log2 <= in_data[3:0];
              REG_SFACTOR: sfactor  <= in_data;
              REG_SEED0:   seed[15:0]  <= in_data;
              REG_SEED1:   seed[31:16] <= in_data;
              REG_SEED2:   seed[47:32] <= in_data;
              REG_SEED3:   seed[63:48] <= in_data;
              REG_DELAY:   delay    <= in_data[7:0];
              default:     ;
            endcase
          end
        end
        default: st <= C_HDR;
      endcase
    end
  end
endmodule
