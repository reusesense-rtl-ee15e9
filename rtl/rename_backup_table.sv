// rename_backup_table: copy of the vector rename map table.
//
// In the preparing state the whole map (architectural z register ->
// vector physical register) is copied in one cycle (save). In the restore
// state it is presented on 'map_out' so the core can write its rename table
// back. 'saved' tells that a copy is held; 'release' drops it after the
// restore.
//
// Timing: save and release take effect at the clock edge; map_out is the
// stored copy. Copying the whole table in one cycle is this design's choice
// (the published design only says a backup is taken and restored).

module rename_backup_table
  import rs_pkg::*;
#(
  parameter int NA = NARCH,
  parameter int PW = VPREG_W
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  save,
  input  logic [NA-1:0][PW-1:0] map_in,
  input  logic                  release_i,
  output logic [NA-1:0][PW-1:0] map_out,
  output logic                  saved
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      map_out <= '0;
      saved   <= 1'b0;
    end else if (save) begin
      map_out <= map_in;
      saved   <= 1'b1;
    end else if (release_i) begin
      saved   <= 1'b0;
    end
  end

endmodule
