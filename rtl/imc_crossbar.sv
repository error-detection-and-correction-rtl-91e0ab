// imc_crossbar -- behavioural model of one resistive in-memory-computing crossbar with its
// column read-out (FeFET or RRAM cells, analog MAC, ADC). Not synthesizable as a real part:
// the analog array and its converters are process-specific; this model only reproduces their
// arithmetic so that the digital checksum logic around it can be simulated.
//
// Function: every column c returns col_out[c] = sum over rows r of in_vec[r] * cells[r][c], the
// multiply-and-accumulate that the shared row inputs and column wires of a crossbar perform.
// A cell holds CELL_W bits, read as unsigned (CELL_SIGNED = 0; CELL_W = 1 gives the binary
// cell of a bit-sliced weight array) or as two's complement (CELL_SIGNED = 1, used for the
// multi-valued checksum weights, which a real array would spread over several binary columns).
// The ADC is taken as ideal: results are exact integers, DW bits wide.
//
// Soft faults: the transient errors the paper studies appear as additive deviations of a
// column's output. The fault input fi[c] is added to column c each time a computation is
// sampled, so a testbench can inject a different error in every (re)computation.
//
// Interface and timing: wr_en writes one row of cells (wr_data[c] into cells[wr_row][c]) at the
// clock edge. go samples in_vec and fi at a clock edge; col_out changes at that edge and holds
// until the next go; valid pulses high LAT cycles after the go edge (LAT >= 1). Cells have no
// reset (non-volatile storage) and must be programmed before use.
module imc_crossbar #(
  parameter int unsigned ROWS        = nc_pkg::ROWS_DEF,
  parameter int unsigned COLS        = nc_pkg::COLS_DEF,
  parameter int unsigned IN_W        = nc_pkg::IN_W_DEF,
  parameter int unsigned CELL_W      = 1,
  parameter bit          CELL_SIGNED = 1'b0,
  parameter int unsigned DW          = nc_pkg::calc_dw(nc_pkg::ROWS_DEF, nc_pkg::COLS_DEF,
                                         nc_pkg::N_PE_DEF, nc_pkg::IN_W_DEF, nc_pkg::WBITS_DEF),
  parameter int unsigned LAT         = nc_pkg::LAT_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // programming
  input  logic                          wr_en,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [CELL_W-1:0]             wr_data [COLS],
  // computation
  input  logic                          go,
  input  logic signed [IN_W-1:0]        in_vec  [ROWS],
  input  logic signed [DW-1:0]          fi      [COLS],
  output logic                          valid,
  output logic signed [DW-1:0]          col_out [COLS]
);

  logic [CELL_W-1:0]   cells [ROWS][COLS];
  logic signed [DW-1:0] mac [COLS];
  logic [LAT-1:0]       vpipe;

  // Cell value as a signed number one bit wider than the cell
  function automatic logic signed [CELL_W:0] cell_val(input logic [CELL_W-1:0] c);
    if (CELL_SIGNED) return {c[CELL_W-1], c};
    else             return {1'b0, c};
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < COLS; c++) cells[wr_row][c] <= wr_data[c];
    end
  end

  // Ideal analog MAC of every column. A binary unsigned cell gates its row input (the AND-like
  // behaviour of a programmed cell); a multi-bit cell multiplies it.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [DW-1:0] acc;
    always_comb begin
      acc = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (CELL_W == 1 && !CELL_SIGNED) begin
          if (cells[r][c][0]) acc = acc + DW'(in_vec[r]);
        end else begin
          logic signed [IN_W+CELL_W:0] prod;
          prod = in_vec[r] * cell_val(cells[r][c]);
          acc  = acc + DW'(prod);
        end
      end
    end
    assign mac[c] = acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int c = 0; c < COLS; c++) col_out[c] <= '0;
    end else begin
      vpipe <= (vpipe << 1) | LAT'(go);
      if (go) begin
        for (int c = 0; c < COLS; c++) col_out[c] <= mac[c] + fi[c];
      end
    end
  end

  assign valid = vpipe[LAT-1];

endmodule
