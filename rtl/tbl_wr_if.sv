// tbl_wr_if: write bus from the tANS table builder into the encoder's tables.
//
// One write per cycle when we is high. kind selects the table:
//   TW_ENC   encodingTable[vtype][addr] = enc_x   (addr 0..L-1, enc_x in L..2L-1)
//   TW_NB    nb[vtype][addr] = nb, start[vtype][addr] = st  (addr = symbol)
// (TW_START is not used on this bus; nb and start of a symbol travel together.)
// Parameters: R (L = 2^R states). nb and st are two's complement.
interface tbl_wr_if
  import daq_pkg::*;
#(
  parameter int unsigned R = 11
);
  localparam int unsigned NB_W = $clog2(R + 1) + R + 2;
  localparam int unsigned ST_W = R + 2;

  logic                   we;
  val_type_e              vtype;
  tw_kind_e               kind;
  logic [R-1:0]           addr;
  logic [R:0]             enc_x;
  logic signed [NB_W-1:0] nb;
  logic signed [ST_W-1:0] st;

  modport src (output we, vtype, kind, addr, enc_x, nb, st);
  modport dst (input  we, vtype, kind, addr, enc_x, nb, st);
endinterface
