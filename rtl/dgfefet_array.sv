// dgfefet_array: behavioural model (not synthesizable logic) of the double-gate
// FeFET (DG FeFET) crossbar that stores the coupling matrix J.
//
// The array has N_ROWS rows and N_ROWS*K_BITS columns. Entry J_ij occupies the
// K_BITS cells of row i, columns j*K_BITS .. j*K_BITS+K_BITS-1; cell b holds
// bit b of J_ij (two's complement, bit K_BITS-1 is the sign). A cell storing
// '1' has a low threshold voltage. Every row shares one front gate (FG) and
// one back gate (BG); every column shares one data line (DL) and one source
// line (SL). A cell sources I_SL = x * G * y * z: x is its FG level, G its
// stored bit, y its DL level and z is set by the common BG voltage. The model
// takes z as the paper's fractional annealing factor f(T) with T = 1000*V_BG,
// times a 9 uA scale (annealer_pkg::cell_current_ua).
//
// Interface: fg/dl are the binary drive levels, vbg_v the back-gate voltage,
// i_sl the column currents in uA (zero on columns whose DL is low). Currents
// settle combinationally. prog_we writes one K_BITS-bit J entry at
// (prog_row, prog_col) on the rising clock edge; all cells start erased.
// The cell transfer and the array organisation follow the paper; the write
// port, the current scale and the T-to-V_BG mapping are this model's choices.
module dgfefet_array
  import annealer_pkg::*;
#(
  parameter int N_ROWS = N_SPINS,
  parameter int K      = K_BITS,
  localparam int IDX_W = $clog2(N_ROWS),
  localparam int N_COLS = N_ROWS * K
) (
  input  logic               clk,
  input  logic               prog_we,
  input  logic [IDX_W-1:0]   prog_row,
  input  logic [IDX_W-1:0]   prog_col,
  input  logic [K-1:0]       prog_data,
  input  logic [N_ROWS-1:0]  fg,
  input  logic [N_COLS-1:0]  dl,
  input  real                vbg_v,
  output real                i_sl [N_COLS]
);

  // g[row][group] holds the K cells of one J entry.
  logic [K-1:0] g [N_ROWS][N_ROWS];

  initial begin
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < N_ROWS; c++)
        g[r][c] = '0;
  end

  always_ff @(posedge clk) begin
    if (prog_we) g[prog_row][prog_col] <= prog_data;
  end

  always_comb begin
    real icell;
    int  cnt;
    icell = cell_current_ua(vbg_v);
    for (int col = 0; col < N_COLS; col++) begin
      cnt = 0;
      if (dl[col]) begin
        for (int r = 0; r < N_ROWS; r++)
          if (fg[r] && g[r][col / K][col % K]) cnt++;
      end
      i_sl[col] = real'(cnt) * icell;
    end
  end

endmodule
