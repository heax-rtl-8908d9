// heax_top: the FPGA-side computing part of HEAX (paper Section 6, Figure 7):
// the MULT module for ciphertext-ciphertext and ciphertext-plaintext products
// and the KeySwitch module for relinearization and rotation, side by side.
//
// In the paper both sit behind a vendor PCIe shell, a control unit that the
// host drives, and DDR channels that hold the key-switching keys for the
// largest parameter set. None of those is described beyond its name, so the
// top brings both modules' load, start and read ports out as plain ports:
// the host side (or a shell) writes operands, keys and twiddle factors,
// starts an operation and reads results back. A complete multiplication with
// relinearization is a MULT run per residue followed by a KeySwitch run on the
// third result component c2, and the addition of the KeySwitch output to
// (c0, c1). Parameter defaults are the Set-B instance of Table 5 (n = 2^13,
// k = 4, Stratix 10); MULT uses 16 cores as in the paper's low-level results.
module heax_top
  import heax_pkg::*;
#(
  parameter int unsigned N        = 8192,
  parameter int unsigned K        = 4,
  parameter int unsigned NC_MULT  = 16,
  parameter int unsigned NC_INTT0 = 16,
  parameter int unsigned NC_NTT0  = 16,
  parameter int unsigned NC_DYD   = 8,
  parameter int unsigned NC_INTT1 = 4,
  parameter int unsigned NC_NTT1  = 16,
  parameter int unsigned NC_MS    = 4,
  localparam int unsigned KW      = $clog2(K + 1),
  localparam int unsigned LOGN    = $clog2(N),
  localparam int unsigned MAW     = $clog2(N / NC_MULT)
) (
  input  logic            clk,
  input  logic            rst_n,
  // ---------------- MULT module
  input  logic            mu_ld_we,
  input  logic            mu_ld_which,
  input  logic            mu_ld_comp,
  input  logic [MAW-1:0]  mu_ld_row,
  input  word_t           mu_ld_data [NC_MULT],
  input  logic            mu_start,
  input  logic [1:0]      mu_alpha,
  input  logic [1:0]      mu_beta,
  input  word_t           mu_p,
  input  word_t           mu_r1,
  input  word_t           mu_r2,
  output logic            mu_busy,
  output logic            mu_done,
  input  logic [1:0]      mu_rd_comp,
  input  logic [MAW-1:0]  mu_rd_row,
  output word_t           mu_rd_data [NC_MULT],
  // ---------------- KeySwitch module
  input  logic            ks_cfg_we,
  input  logic [KW-1:0]   ks_cfg_idx,
  input  word_t           ks_cfg_p,
  input  word_t           ks_cfg_r1,
  input  word_t           ks_cfg_r2,
  input  word_t           ks_cfg_pinv,
  input  logic            ks_tw_we,
  input  logic [$clog2(K+5)-1:0] ks_tw_mod,
  input  logic [KW-1:0]   ks_tw_sel,
  input  logic [LOGN-1:0] ks_tw_row,
  input  word_t           ks_tw_w  [16],
  input  word_t           ks_tw_wp [16],
  input  logic            ks_ksk_we,
  input  logic            ks_ksk_set,
  input  logic [KW-1:0]   ks_ksk_i,
  input  logic [KW-1:0]   ks_ksk_j,
  input  logic [LOGN-1:0] ks_ksk_idx,
  input  word_t           ks_ksk_data [NC_DYD],
  input  logic            ks_in_we,
  input  logic [KW-1:0]   ks_in_res,
  input  logic [LOGN-1:0] ks_in_idx,
  input  word_t           ks_in_data [NC_DYD],
  input  logic            ks_start,
  output logic            ks_busy,
  output logic            ks_done,
  input  logic            ks_out_set,
  input  logic [KW-1:0]   ks_out_res,
  input  logic [LOGN-1:0] ks_out_idx,
  output word_t           ks_out_data [NC_MS]
);
  mult_module #(.N(N), .NC(NC_MULT), .MAXC(2)) u_mult (
    .clk, .rst_n,
    .ld_we(mu_ld_we), .ld_which(mu_ld_which), .ld_comp(mu_ld_comp), .ld_row(mu_ld_row),
    .ld_data(mu_ld_data), .start(mu_start), .alpha(mu_alpha), .beta(mu_beta),
    .p(mu_p), .r1(mu_r1), .r2(mu_r2), .busy(mu_busy), .done(mu_done),
    .rd_comp(mu_rd_comp), .rd_row(mu_rd_row), .rd_data(mu_rd_data));

  keyswitch #(.N(N), .K(K), .NC_INTT0(NC_INTT0), .NC_NTT0(NC_NTT0), .NC_DYD(NC_DYD),
              .NC_INTT1(NC_INTT1), .NC_NTT1(NC_NTT1), .NC_MS(NC_MS)) u_ks (
    .clk, .rst_n,
    .cfg_we(ks_cfg_we), .cfg_idx(ks_cfg_idx), .cfg_p(ks_cfg_p), .cfg_r1(ks_cfg_r1),
    .cfg_r2(ks_cfg_r2), .cfg_pinv(ks_cfg_pinv),
    .tw_we(ks_tw_we), .tw_mod(ks_tw_mod), .tw_sel(ks_tw_sel), .tw_row(ks_tw_row),
    .tw_w(ks_tw_w), .tw_wp(ks_tw_wp),
    .ksk_we(ks_ksk_we), .ksk_set(ks_ksk_set), .ksk_i(ks_ksk_i), .ksk_j(ks_ksk_j),
    .ksk_idx(ks_ksk_idx), .ksk_data(ks_ksk_data),
    .in_we(ks_in_we), .in_res(ks_in_res), .in_idx(ks_in_idx), .in_data(ks_in_data),
    .start(ks_start), .busy(ks_busy), .done(ks_done),
    .out_set(ks_out_set), .out_res(ks_out_res), .out_idx(ks_out_idx), .out_data(ks_out_data));
endmodule
