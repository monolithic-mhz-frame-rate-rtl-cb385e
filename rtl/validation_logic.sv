// validation_logic -- programmable AND/OR tree that decides whether a frame's
// hits look like a real event or like dark counts.
//
// The N_ROWS row wired-OR lines enter a tree of log2(N_ROWS) levels. Level 0
// combines neighbouring rows (R<1>/R<0>, R<3>/R<2>, ...), each next level
// combines neighbouring outputs of the level before, down to one Valid bit.
// All gates of level s are AND when valid_cntr[s] = 1 and OR when it is 0.
// All-OR accepts any hit; all-AND needs every row to fire at once; mixes
// ask for clusters of simultaneously firing rows. Purely combinational.
//
// Follows the chip: four levels for 16 rows, one control bit per level,
// neighbour pairing. Own choice: the 1 = AND encoding.
module validation_logic #(
  parameter int unsigned N_ROWS = dsipm_pkg::Q_ROWS,
  localparam int unsigned LEVELS = $clog2(N_ROWS)
) (
  input  logic [N_ROWS-1:0] r,            // row wired-ORs, active high
  input  logic [LEVELS-1:0] valid_cntr,   // per level: 1 = AND, 0 = OR
  output logic              valid
);
  timeunit 1ps; timeprecision 1fs;

  logic [LEVELS:0][N_ROWS-1:0] t;

  always_comb begin
    t    = '0;
    t[0] = r;
    for (int s = 0; s < LEVELS; s++) begin
      for (int i = 0; i < int'(N_ROWS >> (s + 1)); i++) begin
        t[s+1][i] = valid_cntr[s] ? (t[s][2*i] & t[s][2*i+1])
                                  : (t[s][2*i] | t[s][2*i+1]);
      end
    end
  end

  assign valid = t[LEVELS][0];
endmodule
