// crossbar_array: behavioural model of the PCM crossbar with its row decoder
// and sense amplifiers.
//
// The real part is an analog phase-change-memory array of M*L rows by D
// columns. Row (m-1)*L + (l-1) holds the pre-computed channel-bound
// hypervector I_m^l = CiM(l) XOR E_m as binary conductance states. The row
// decoder activates one word line and a row of D sense amplifiers thresholds
// the D bit-line currents. This model keeps only that digital behaviour: each
// device is one stored bit, a read returns exactly the programmed row, and
// device variation, drift and read noise are not modelled. It is written as a
// plain memory array so that it can stand in for the macro in synthesis too.
//
// Interface: prog_en_i writes prog_data_i into row prog_row_i (programming,
// done once before use). rd_en_i reads row rd_row_i; the sense amplifiers
// latch the row at that clock edge, so sa_data_o/sa_valid_o follow one cycle
// later. A row address past the array reads as all zeros.
module crossbar_array #(
  parameter int unsigned ROWS = hdc_pkg::M * hdc_pkg::L_MAX,
  parameter int unsigned D    = hdc_pkg::D,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // programming port
  input  logic          prog_en_i,
  input  logic [RW-1:0] prog_row_i,
  input  logic [D-1:0]  prog_data_i,
  // read port (row decoder input)
  input  logic          rd_en_i,
  input  logic [RW-1:0] rd_row_i,
  // sense amplifier outputs
  output logic          sa_valid_o,
  output logic [D-1:0]  sa_data_o
);

  logic [D-1:0] cells [ROWS];

  always_ff @(posedge clk_i) begin
    if (prog_en_i && (32'(prog_row_i) < ROWS)) cells[prog_row_i] <= prog_data_i;
  end

  // Sense amplifier latch.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sa_valid_o <= 1'b0;
      sa_data_o  <= '0;
    end else begin
      sa_valid_o <= rd_en_i;
      if (rd_en_i) sa_data_o <= (32'(rd_row_i) < ROWS) ? cells[rd_row_i] : '0;
    end
  end

endmodule
