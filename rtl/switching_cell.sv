// switching_cell: the combinational cell of the readout switching network.
//
// A cell has its own data (own_*), an upstream neighbour (up_*) and a
// downstream neighbour. Data flow downstream: the cell forwards its own data
// when it has any, otherwise its upstream neighbour's, so empty pixels are
// passed through. The read grant flows the other way: it reaches the
// upstream neighbour only when this cell is empty, so a cell always sends
// before its upstream neighbour. own_read tells the owner its data were
// taken. The behaviour is the published one; the logic equations are the
// simplest that give it.
module switching_cell
  import etroc_pkg::*;
(
  input  logic own_valid,
  input  hit_t own_data,
  input  logic up_valid,
  input  hit_t up_data,
  input  logic grant_in,
  output logic dn_valid,
  output hit_t dn_data,
  output logic grant_up,
  output logic own_read
);

  assign dn_valid = own_valid | up_valid;
  assign dn_data  = own_valid ? own_data : up_data;
  assign grant_up = grant_in & ~own_valid;
  assign own_read = grant_in & own_valid;

endmodule
