// rvfl_top: classifier built on a Random Vector Functional Link network
// whose hidden layer works on density-encoded (thermometer) inputs.
//
// Data flow of one pass:
//   x (K features) -> density_quantizer (v_i = round(x_i * N))
//   -> LANES hidden_neuron units: h_j = clip_kappa( sum_i F[j][i] * W_in[j][i] )
//      with F[j][i] = -1 when j < v_i, else +1, for the LANES neurons of
//      one group per cycle, W_in rows read from win_mem
//   -> readout_mac: y_l += W_out[l][j] * h_j, W_out read from wout_mem
//   -> argmax: predicted class.
// Only small integers appear anywhere: h lies in [-kappa, kappa], the
// readout weights are WOUT_BITS-bit integers.
//
// Interface. Load: win_we/win_waddr/win_wdata and wout_we/wout_waddr/
// wout_wdata write one memory word (layouts in win_mem and wout_mem);
// writes are only taken while idle (cfg_ready high) and are dropped
// otherwise. Classify: a one-cycle start pulse while idle captures x and
// kappa; done pulses N/LANES + 3 cycles later, when y (the L output sums)
// and cls (the index of the largest sum, lowest index on a tie) are valid;
// a start while busy is ignored and flagged on start_dropped.
// They stay valid until the next pass finishes. Synchronous active-high
// reset.
//
// The arithmetic follows the density-encoded RVFL algorithm exactly. The
// lane-parallel schedule, the memory layout, the load port, the input
// fixed-point format and the run-time kappa input are this design's own.
module rvfl_top #(
  parameter int unsigned K         = rvfl_pkg::K_DEF,
  parameter int unsigned N         = rvfl_pkg::N_DEF,
  parameter int unsigned L         = rvfl_pkg::L_DEF,
  parameter int unsigned WOUT_BITS = rvfl_pkg::WOUT_BITS_DEF,
  parameter int unsigned KAPPA_MAX = rvfl_pkg::KAPPA_MAX_DEF,
  parameter int unsigned FRAC_BITS = rvfl_pkg::FRAC_BITS_DEF,
  parameter int unsigned LANES     = rvfl_pkg::LANES_DEF,
  localparam int unsigned XW  = FRAC_BITS + 1,
  localparam int unsigned VW  = rvfl_pkg::ubits(N),
  localparam int unsigned JW  = rvfl_pkg::ubits(N - 1),
  localparam int unsigned KW  = rvfl_pkg::ubits(KAPPA_MAX),
  localparam int unsigned HW  = rvfl_pkg::sbits(KAPPA_MAX),
  localparam int unsigned SW  = rvfl_pkg::sbits(K),
  localparam int unsigned G   = N / LANES,
  localparam int unsigned AW  = rvfl_pkg::ubits(G - 1),
  localparam int unsigned WIW = LANES * K,
  localparam int unsigned WOW = LANES * L * WOUT_BITS,
  localparam int unsigned YW  = rvfl_pkg::sbits(N * KAPPA_MAX * (1 << (WOUT_BITS - 1))),
  localparam int unsigned CW  = rvfl_pkg::ubits(L - 1)
) (
  input  logic                         clk,
  input  logic                         rst,
  // weight loading
  output logic                         cfg_ready,
  input  logic                         win_we,
  input  logic [AW-1:0]                win_waddr,
  input  logic [WIW-1:0]               win_wdata,
  input  logic                         wout_we,
  input  logic [AW-1:0]                wout_waddr,
  input  logic [WOW-1:0]               wout_wdata,
  // classification
  input  logic                         start,
  input  logic [K-1:0][XW-1:0]         x,
  input  logic [KW-1:0]                kappa,
  output logic                         busy,
  output logic                         done,
  output logic signed [L-1:0][YW-1:0]  y,
  output logic [CW-1:0]                cls,
  output logic                         start_dropped  // start seen while busy
);
  initial begin
    assert (N % LANES == 0) else $error("N must be a multiple of LANES");
  end

  // ---- control ----
  logic          v_load, acc_clr, acc_en, res_load, start_ignored;
  logic [AW-1:0] rd_addr, acc_grp;

  rvfl_ctrl #(.N(N), .LANES(LANES)) u_ctrl (
    .clk, .rst, .start, .busy, .v_load, .acc_clr, .rd_addr, .acc_en,
    .acc_grp, .res_load, .done, .start_ignored
  );

  assign cfg_ready     = !busy;
  assign start_dropped = start_ignored;

  // ---- input layer and density-based representation ----
  logic [K-1:0][VW-1:0] v_now, v_reg;
  logic [KW-1:0]        kappa_reg;

  for (genvar i = 0; i < K; i++) begin : g_quant
    density_quantizer #(.N(N), .FRAC_BITS(FRAC_BITS)) u_q (
      .x_q(x[i]), .v(v_now[i])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v_reg     <= '0;
      kappa_reg <= '0;
    end else if (v_load) begin
      v_reg     <= v_now;
      kappa_reg <= kappa;
    end
  end

  // ---- weight memories ----
  logic [WIW-1:0] win_rdata;
  logic [WOW-1:0] wout_rdata;

  win_mem #(.K(K), .N(N), .LANES(LANES)) u_win (
    .clk, .we(win_we && cfg_ready), .waddr(win_waddr), .wdata(win_wdata),
    .raddr(rd_addr), .rdata(win_rdata)
  );

  wout_mem #(.N(N), .L(L), .WOUT_BITS(WOUT_BITS), .LANES(LANES)) u_wout (
    .clk, .we(wout_we && cfg_ready), .waddr(wout_waddr), .wdata(wout_wdata),
    .raddr(rd_addr), .rdata(wout_rdata)
  );

  // ---- hidden layer: binding, bundling, clipping ----
  logic signed [LANES-1:0][HW-1:0] h;
  logic signed [LANES-1:0][SW-1:0] pre;

  for (genvar p = 0; p < LANES; p++) begin : g_hidden
    logic [JW-1:0] j_idx;
    assign j_idx = JW'(acc_grp * LANES + p);
    hidden_neuron #(.K(K), .N(N), .KAPPA_MAX(KAPPA_MAX)) u_h (
      .v(v_reg), .j(j_idx), .w_row(win_rdata[p*K +: K]), .kappa(kappa_reg),
      .sum(pre[p]), .h(h[p])
    );
  end

  // ---- output layer ----
  logic signed [L-1:0][YW-1:0] y_acc;
  logic [CW-1:0]               cls_now;
  logic signed [YW-1:0]        y_max;

  readout_mac #(.N(N), .L(L), .WOUT_BITS(WOUT_BITS), .KAPPA_MAX(KAPPA_MAX),
                .LANES(LANES)) u_mac (
    .clk, .rst, .clr(acc_clr), .en(acc_en), .h,
    .w(wout_rdata), .y(y_acc)
  );

  argmax #(.L(L), .YW(YW)) u_argmax (.y(y_acc), .cls(cls_now), .y_max);

  always_ff @(posedge clk) begin
    if (rst) begin
      y   <= '0;
      cls <= '0;
    end else if (res_load) begin
      y   <= y_acc;
      cls <= cls_now;
    end
  end

endmodule
