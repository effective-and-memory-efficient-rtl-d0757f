// zs_mem_ctrl: read-data path of a DNN accelerator's memory controller with
// zero-space error detection and correction (MSET or CEP).
//
// DNN parameters are encoded offline and stored in main memory with no extra
// check bits. Every line read from memory passes through the decoder in the
// controller before it reaches the accelerator. Four decoders work in
// parallel on the incoming line: MSET for FP16, MSET for FP32, CEP with FP16
// reordering and CEP with FP32 reordering. mode_i picks one of them for each
// line. The chosen result goes into a single output register.
//
// Following the paper: the decoder sits between memory and accelerator, and
// MSET and CEP work as their own modules describe. This design's own choices:
// the run-time mode select, the valid/ready handshakes on both sides, the one
// output register stage, and the error-flag outputs.
//
// Interface
//   memory side     : mem_rvalid_i / mem_rready_o / mem_rdata_i (encoded line)
//   accelerator side: acc_valid_o / acc_ready_i / acc_data_o (decoded line),
//                     acc_mode_o (scheme used for this line),
//                     acc_mset_err_o (per-word vote disagreement, MSET modes;
//                     word w -> bit w), acc_cep_err_o (per-chunk parity
//                     mismatch, CEP modes; line bits 4c+3..4c -> bit c)
// Timing: a line accepted in cycle t (mem_rvalid_i && mem_rready_o) appears
// on acc_* from cycle t+1. One line per cycle is sustained while acc_ready_i
// is high; when the accelerator stalls, the output is held and mem_rready_o
// drops. mode_i is sampled together with each line, so a mode change takes
// effect on the next accepted line. rst_n is an active-low synchronous reset
// that empties the output register.
module zs_mem_ctrl
  import zs_pkg::*;
#(
  parameter int unsigned LINE_W = zs_pkg::LINE_W_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  zs_mode_e            mode_i,
  // main memory read data
  input  logic                mem_rvalid_i,
  output logic                mem_rready_o,
  input  logic [LINE_W-1:0]   mem_rdata_i,
  // accelerator
  output logic                acc_valid_o,
  input  logic                acc_ready_i,
  output logic [LINE_W-1:0]   acc_data_o,
  output zs_mode_e            acc_mode_o,
  output logic [LINE_W/16-1:0] acc_mset_err_o,
  output logic [LINE_W/4-1:0] acc_cep_err_o
);
  localparam int unsigned NW16 = LINE_W / 16;
  localparam int unsigned NW32 = LINE_W / 32;

  logic [LINE_W-1:0]   dec_m16, dec_m32, dec_c16, dec_c32;
  logic [NW16-1:0]     err_m16;
  logic [NW32-1:0]     err_m32;
  logic [LINE_W/4-1:0] err_c16, err_c32;

  mset_decoder #(.LINE_W(LINE_W), .DATA_W(16)) u_mset16 (
    .enc_i(mem_rdata_i), .dec_o(dec_m16), .err_o(err_m16));
  mset_decoder #(.LINE_W(LINE_W), .DATA_W(32)) u_mset32 (
    .enc_i(mem_rdata_i), .dec_o(dec_m32), .err_o(err_m32));
  cep_decoder  #(.LINE_W(LINE_W), .DATA_W(16)) u_cep16 (
    .enc_i(mem_rdata_i), .dec_o(dec_c16), .err_o(err_c16));
  cep_decoder  #(.LINE_W(LINE_W), .DATA_W(32)) u_cep32 (
    .enc_i(mem_rdata_i), .dec_o(dec_c32), .err_o(err_c32));

  // Select the decoder of the current mode.
  logic [LINE_W-1:0]   sel_data;
  logic [NW16-1:0]     sel_mset_err;
  logic [LINE_W/4-1:0] sel_cep_err;

  always_comb begin
    sel_data     = dec_m16;
    sel_mset_err = '0;
    sel_cep_err  = '0;
    unique case (mode_i)
      MODE_MSET_FP16: begin
        sel_data     = dec_m16;
        sel_mset_err = err_m16;
      end
      MODE_MSET_FP32: begin
        sel_data              = dec_m32;
        sel_mset_err[NW32-1:0] = err_m32;
      end
      MODE_CEP_FP16: begin
        sel_data    = dec_c16;
        sel_cep_err = err_c16;
      end
      MODE_CEP_FP32: begin
        sel_data    = dec_c32;
        sel_cep_err = err_c32;
      end
      default: ;
    endcase
  end

  // Output register with valid/ready handshake.
  logic load;
  assign mem_rready_o = !acc_valid_o || acc_ready_i;
  assign load         = mem_rvalid_i && mem_rready_o;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_valid_o    <= 1'b0;
      acc_data_o     <= '0;
      acc_mode_o     <= MODE_MSET_FP16;
      acc_mset_err_o <= '0;
      acc_cep_err_o  <= '0;
    end else begin
      if (load) begin
        acc_data_o     <= sel_data;
        acc_mode_o     <= mode_i;
        acc_mset_err_o <= sel_mset_err;
        acc_cep_err_o  <= sel_cep_err;
      end
      if (mem_rready_o) acc_valid_o <= mem_rvalid_i;
    end
  end

  // A line offered to the accelerator must stay put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    acc_valid_o && !acc_ready_i |=> acc_valid_o && $stable(acc_data_o) && $stable(acc_mode_o));

endmodule
