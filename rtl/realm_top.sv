// realm_top: statistical-ABFT GEMM core.
//
// Two N x N INT8 systolic arrays protected by checksums, one weight
// stationary (ws_abft_array) and one output stationary (os_abft_array), share
// one statistical unit (stat_unit).  mode selects the dataflow of the next
// tile: the selected array receives the input streams and delivers its
// outputs and its N checksum pairs; the other array sees no valid data.
// After the N-th pair the statistical unit reports the matrix sum deviation,
// theta_mag, the effective error frequency and whether the tile must be
// recovered.  Recovery itself (recomputation at nominal voltage, or raising
// the supply) is outside this core: recover is its request.
//
// The paper evaluates 256 x 256 arrays "supporting both WS and OS
// dataflows" and draws one statistical unit per array; sharing one unit
// between the two arrays and selecting with mode is this design's choice.
//
// Interface (all streams skewed by the caller, see the two array modules):
//   WS tile : w_load for N cycles with w_bus = one weight row each cycle,
//             then N input columns on x_bus/x_vld; y_out/y_vld per column.
//   OS tile : os_start, then weight rows on w_bus/w_vld and input columns
//             on x_bus/x_vld; outputs drain on y_out with y_vld (all bits).
//   a, b, theta_freq : fitted detection parameters of the current layer.
//   res_valid pulses with recover, freq_eff, msd and theta_mag.
//   inj_flip/inj_bit : bit-flip injection on the array outputs.
// mode may change only while both arrays and the statistical unit are idle.
//
// Size: the paper's arrays are 256 x 256.  The default here is N = 128
// because a Verilator lint of the two 256 x 256 arrays and the core side by
// side needs more than 32 GB (measured 0.47 GB per array at N = 64 and
// 3.5 GB for the core at N = 128, growing with the PE count).  N = 256 is a
// legal parameter value and all widths are chosen for it.
module realm_top
  import realm_pkg::*;
#(
  parameter int unsigned N     = 128,   // 256 in the paper, see the note above
  parameter int unsigned MSD_W = CKW + $clog2(N),
  parameter int unsigned CW    = $clog2(N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dataflow_e            mode,
  input  logic                 w_load,
  input  logic                 os_start,
  input  logic signed [DW-1:0] w_bus  [N],
  input  logic                 w_vld  [N],
  input  logic signed [DW-1:0] x_bus  [N],
  input  logic                 x_vld  [N],
  input  logic [N-1:0]         inj_flip,
  input  logic [4:0]           inj_bit,
  input  logic [A_W-1:0]       a,
  input  theta_t               b,
  input  logic [CW-1:0]        theta_freq,
  output logic signed [PW-1:0] y_out  [N],
  output logic                 y_vld  [N],
  output logic                 os_busy,
  output logic                 stat_busy,
  output logic                 res_valid,
  output logic                 recover,
  output logic [CW-1:0]        freq_eff,
  output logic [MSD_W-1:0]     msd,
  output theta_t               theta_mag
);

  logic                 ws_sel, os_sel;
  logic                 ws_xv [N];
  logic                 os_wv [N];
  logic                 os_xv [N];
  logic signed [PW-1:0] ws_y  [N];
  logic                 ws_yv [N];
  logic signed [PW-1:0] os_y  [N];
  logic                 os_yv;
  logic                 ws_pv, os_pv;
  cks_pair_t            ws_pair, os_pair;
  logic                 st_valid;
  cks_pair_t            st_pair;

  assign ws_sel = (mode == DF_WS);
  assign os_sel = (mode == DF_OS);

  for (genvar k = 0; k < N; k++) begin : g_gate
    assign ws_xv[k] = ws_sel & x_vld[k];
    assign os_wv[k] = os_sel & w_vld[k];
    assign os_xv[k] = os_sel & x_vld[k];
  end

  ws_abft_array #(.N(N)) u_ws (
    .clk        (clk),
    .rst_n      (rst_n),
    .w_load     (ws_sel & w_load),
    .w_row      (w_bus),
    .x_in       (x_bus),
    .x_valid    (ws_xv),
    .inj_flip   (ws_sel ? inj_flip : '0),
    .inj_bit    (inj_bit),
    .y_out      (ws_y),
    .y_valid    (ws_yv),
    .pair_valid (ws_pv),
    .pair       (ws_pair)
  );

  os_abft_array #(.N(N)) u_os (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (os_sel & os_start),
    .w_in       (w_bus),
    .w_valid    (os_wv),
    .x_in       (x_bus),
    .x_valid    (os_xv),
    .inj_flip   (os_sel ? inj_flip : '0),
    .inj_bit    (inj_bit),
    .y_out      (os_y),
    .y_valid    (os_yv),
    .pair_valid (os_pv),
    .pair       (os_pair),
    .busy       (os_busy)
  );

  for (genvar k = 0; k < N; k++) begin : g_yout
    assign y_out[k] = ws_sel ? ws_y[k]  : os_y[k];
    assign y_vld[k] = ws_sel ? ws_yv[k] : os_yv;
  end

  assign st_valid = ws_sel ? ws_pv   : os_pv;
  assign st_pair  = ws_sel ? ws_pair : os_pair;

  stat_unit #(.N(N), .MSD_W(MSD_W), .CW(CW)) u_stat (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (st_valid),
    .in_pair    (st_pair),
    .a          (a),
    .b          (b),
    .theta_freq (theta_freq),
    .busy       (stat_busy),
    .res_valid  (res_valid),
    .recover    (recover),
    .freq_eff   (freq_eff),
    .msd        (msd),
    .theta_mag  (theta_mag)
  );

  // the WS array emits one pair per input column; the OS array only while
  // its controller is sending, so neither may overlap the other
  a_single_source: assert property (@(posedge clk) disable iff (!rst_n) !(ws_pv && os_pv))
    else $error("realm_top: both arrays delivered checksum pairs");

endmodule
