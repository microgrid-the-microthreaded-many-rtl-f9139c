// placeid_decode: turns a place identifier into the first core and the number
// of cores of a place.
//
// A place is a group of adjacent cores whose size is a power of two and whose
// first core number is a multiple of that size. The identifier packs both:
//   first core = (pid & (pid - 1)) >> 1
//   size       =  pid & -pid
// so that pid = (first << 1) | size. Two identifiers are reserved: 0 names
// the core the request comes from (the local place, one core) and 1 names the
// place of the requesting thread's family (the default place), which the
// caller supplies on default_pid. These formulas and reserved values follow
// the source description; the valid flag (place lies inside the chip) is this
// design's own addition.
//
// Purely combinational; no clock.
module placeid_decode
  import mg_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_DEF
) (
  input  logic [CORE_W:0]   pid,          // requested place identifier
  input  logic [CORE_W-1:0] self_core,    // core issuing the request
  input  logic [CORE_W:0]   default_pid,  // identifier of the default place
  output logic [CORE_W-1:0] first_core,
  output logic [CORE_W:0]   size,
  output logic              valid          // place lies inside the chip
);
  logic [CORE_W:0] eff;
  logic [CORE_W:0] st;

  always_comb begin
    unique case (pid)
      '0:      eff = {self_core, 1'b1};    // local place: this core alone
      'd1:     eff = default_pid;
      default: eff = pid;
    endcase
    st         = place_start(eff);
    size       = place_size(eff);
    first_core = st[CORE_W-1:0];
    valid      = (eff != '0) && ((CORE_W+2)'(st) + (CORE_W+2)'(size) <= (CORE_W+2)'(NCORES));
  end
endmodule
