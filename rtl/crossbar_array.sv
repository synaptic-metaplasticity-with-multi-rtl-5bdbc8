// crossbar_array: BEHAVIOURAL MODEL of one memristor crossbar tile with its
// peripheral circuits (input drivers, current sensing and conversion),
// standing for analog circuitry; not meant for synthesis.
//
// The tile holds ROWS x COLS signed quantized weights. Each weight is the
// conductance difference of two 1T1R cells in adjacent columns (device column
// 2j holds the positive part, 2j+1 the negative part), so ROWS x 2*COLS cells
// in all; with the defaults that is 128 x 128 = 16 kbit, the size of the
// characterised array. The state of every device is kept in two arrays; a
// programming pulse passes the addressed device through the device model
// (rram_cell) and stores its new state. With nine levels per device each
// weight takes one of 17 values, zero being two equal conductances.
//
// Forward (mvm_dir = 0): the activations x_i drive the rows and each column
// j returns y_j = sum_i W_ij x_i (Ohm's law for the products, Kirchhoff's
// current law for the sum). Backward (mvm_dir = 1): the errors d_j drive the
// columns and each row returns z_i = sum_j W_ij d_j. The analog operation is
// modelled as exact integer arithmetic, result registered one cycle after
// mvm_start (mvm_done pulses then); converter resolution, noise and
// conductance variability are not modelled.
//
// Programming: a pulse on (prog_row, prog_dcol) applies prog_op with
// compliance code prog_icc to one device. rd_row/rd_col read back one weight
// (conductance difference) combinationally.
//
// The differential encoding and the forward/backward use follow the paper;
// the tile split (128 rows x 64 weight columns), the latency and the digital
// interface are this design's choice.
module crossbar_array
  import meta_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 64,
  parameter int SUM_W = ACT_W + LVL_W + $clog2(ROWS > COLS ? ROWS : COLS),
  parameter int RW    = $clog2(ROWS),
  parameter int CW    = $clog2(COLS)
)(
  input  logic                    clk,
  input  logic                    rst_n,      // all cells pristine
  // programming port (one device per pulse)
  input  logic                    prog_pulse,
  input  logic [RW-1:0]           prog_row,
  input  logic [CW:0]             prog_dcol,  // device column, 0 .. 2*COLS-1
  input  prog_op_e                prog_op,
  input  devl_t                   prog_icc,
  // analog matrix-vector products
  input  logic                    mvm_start,
  input  logic                    mvm_dir,    // 0 forward, 1 backward
  input  act_t                    x_in  [ROWS],
  input  act_t                    d_in  [COLS],
  output logic signed [SUM_W-1:0] y_out [COLS],
  output logic signed [SUM_W-1:0] z_out [ROWS],
  output logic                    mvm_done,
  // read-back of one weight
  input  logic [RW-1:0]           rd_row,
  input  logic [CW-1:0]           rd_col,
  output lvl_t                    rd_ws,
  output logic                    rd_formed
);
  devl_t lvl    [ROWS][2*COLS];     // device conductance levels
  logic  formed [ROWS][2*COLS];     // device forming state
  devl_t cell_level_next;
  logic  cell_formed_next;

  // response of the addressed device to the programming pulse
  rram_cell u_cell (
    .op          (prog_op),
    .icc         (prog_icc),
    .level       (lvl[prog_row][prog_dcol]),
    .formed      (formed[prog_row][prog_dcol]),
    .level_next  (cell_level_next),
    .formed_next (cell_formed_next)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvl    <= '{default: '0};
      formed <= '{default: 1'b0};
    end else if (prog_pulse) begin
      lvl[prog_row][prog_dcol]    <= cell_level_next;
      formed[prog_row][prog_dcol] <= cell_formed_next;
    end
  end

  function automatic lvl_t weight(devl_t gp, devl_t gn);
    return lvl_t'({1'b0, gp}) - lvl_t'({1'b0, gn});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mvm_done <= 1'b0;
      for (int j = 0; j < COLS; j++) y_out[j] <= '0;
      for (int i = 0; i < ROWS; i++) z_out[i] <= '0;
    end else begin
      mvm_done <= mvm_start;
      if (mvm_start && !mvm_dir) begin
        for (int j = 0; j < COLS; j++) begin
          automatic logic signed [SUM_W-1:0] acc = '0;
          for (int i = 0; i < ROWS; i++)
            acc += SUM_W'(weight(lvl[i][2*j], lvl[i][2*j+1])) * SUM_W'(x_in[i]);
          y_out[j] <= acc;
        end
      end
      if (mvm_start && mvm_dir) begin
        for (int i = 0; i < ROWS; i++) begin
          automatic logic signed [SUM_W-1:0] acc = '0;
          for (int j = 0; j < COLS; j++)
            acc += SUM_W'(weight(lvl[i][2*j], lvl[i][2*j+1])) * SUM_W'(d_in[j]);
          z_out[i] <= acc;
        end
      end
    end
  end

  assign rd_ws     = weight(lvl[rd_row][2*rd_col], lvl[rd_row][2*rd_col+1]);
  assign rd_formed = formed[rd_row][2*rd_col] && formed[rd_row][2*rd_col+1];

endmodule
