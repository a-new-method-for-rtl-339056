// chrom_decode: turns a chromosome into the settings of the whole lattice.
//
// Elements outside the compensation zone [zone_first, zone_first+ZONE_LEN)
// keep their nominal setting. Inside the zone, element zone_first+p takes
// genes 3p (phase), 3p+1 (cavity field) and 3p+2 (solenoid field). When
// fail_valid is high the cavity field of element fail_idx is forced to zero:
// a failed cavity gives no acceleration whatever the optimiser proposes. With
// use_chrom low the nominal settings pass unchanged (normal operation).
// Purely combinational.
module chrom_decode
  import cr_pkg::*;
#(
  parameter int N_ELEM_P   = N_ELEM,
  parameter int ZONE_LEN_P = ZONE_LEN
) (
  input  setting_t [N_ELEM_P-1:0]          nom_set,
  input  logic [NSET*ZONE_LEN_P-1:0][DW-1:0] chrom,
  input  logic                             use_chrom,
  input  logic [4:0]                       zone_first,
  input  logic                             fail_valid,
  input  logic [4:0]                       fail_idx,
  output setting_t [N_ELEM_P-1:0]          set_out
);

  always_comb begin
    for (int e = 0; e < N_ELEM_P; e++) begin
      int p;
      p = e - int'(zone_first);
      set_out[e] = nom_set[e];
      if (use_chrom && p >= 0 && p < ZONE_LEN_P) begin
        set_out[e].phi = chrom[NSET*p];
        set_out[e].v   = chrom[NSET*p+1];
        set_out[e].b   = chrom[NSET*p+2];
      end
      if (fail_valid && int'(fail_idx) == e) set_out[e].v = '0;
    end
  end

endmodule
