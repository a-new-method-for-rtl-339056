// cr_pkg: types and constants shared by the cavity-failure compensation engine.
//
// Numbers are 18-bit two's-complement fixed point (Q6.12: sign, 5 integer bits,
// 12 fraction bits). The 18-bit width matches the beam-state buses of the
// original FPGA implementation; the split between integer and fraction bits is
// this design's own choice (it holds energies up to 10 MeV and Twiss values of a
// few metres with 0.25e-3 resolution).
//
// A beam state is ten numbers: kinetic energy and alpha/beta/gamma in x, y, z.
// A setting is the triple (cavity phase, cavity field, solenoid field) of one
// lattice period. The configuration bus is one register-write struct that every
// block decodes for the regions it owns.
package cr_pkg;

  localparam int DW       = 18;  // datapath width
  localparam int FRAC     = 12;  // fraction bits
  localparam int N_ELEM   = 14;  // lattice periods of Injector I
  localparam int NSTATE   = 10;  // energy + 3 x (alpha, beta, gamma)
  localparam int NSET     = 3;   // phase, cavity field, solenoid field
  localparam int NVAR     = 1 + NSTATE + NSET;  // model inputs incl. constant 1
  localparam int NTERM    = 16;  // basis terms per element
  localparam int ELEM_LAT = 4;   // pipeline cycles per element
  localparam int NFIT     = 7;   // energy, alpha/beta in x, y, z
  localparam int ZONE_LEN = 5;   // periods used for compensation
  localparam int NGENE    = NSET * ZONE_LEN;
  localparam int FIT_W    = 20;  // objective value, unsigned Q8.12
  localparam int POP      = 32;  // GA population

  // State vector positions
  localparam int S_E  = 0;
  localparam int S_AX = 1, S_BX = 2, S_GX = 3;
  localparam int S_AY = 4, S_BY = 5, S_GY = 6;
  localparam int S_AZ = 7, S_BZ = 8, S_GZ = 9;

  // Model input vector positions: 0 is the constant 1.0, 1..10 the state,
  // 11..13 the setting.
  localparam int V_ONE = 0;
  localparam int V_PHI = 1 + NSTATE;
  localparam int V_V   = 2 + NSTATE;
  localparam int V_B   = 3 + NSTATE;

  typedef logic signed [DW-1:0] fx_t;
  typedef logic [NSTATE-1:0][DW-1:0] state_t;   // element i at [i], read with $signed

  typedef struct packed {
    logic [DW-1:0] phi;   // synchronous phase
    logic [DW-1:0] v;     // accelerating field
    logic [DW-1:0] b;     // solenoid field
  } setting_t;

  typedef logic [NGENE-1:0][DW-1:0] chrom_t;    // gene g = zone period g/3, kind g%3

  // Configuration regions
  typedef enum logic [3:0] {
    R_WEIGHT    = 4'd0,  // idx = {k[3:0], j[3:0]}: weight of term j for output k
    R_BASIS     = 4'd1,  // idx = j: data[7:0] = {b[3:0], a[3:0]}, term j = v[a]*v[b]
    R_NOM_SET   = 4'd2,  // idx 0 phi, 1 v, 2 b
    R_NOM_STATE = 4'd3,  // idx = state position, nominal state after element
    R_INV       = 4'd4,  // idx = fit position, 1/nominal after element
    R_ENTRANCE  = 4'd5,  // idx = state position, beam at lattice entrance
    R_GENE_LO   = 4'd6,  // elem = zone position, idx = kind
    R_GENE_HI   = 4'd7,
    R_MISC      = 4'd8   // idx 0..2 beta limits x,y,z; 3 fitness target; 4 max generations; 5 mutation threshold
  } cfg_region_e;

  typedef struct packed {
    logic          en;
    cfg_region_e   region;
    logic [4:0]    elem;
    logic [7:0]    idx;
    logic [DW-1:0] data;
  } cfg_wr_t;

  // Fit position -> state position
  function automatic int fit_pos(input int k);
    case (k)
      0: return S_E;
      1: return S_AX;
      2: return S_BX;
      3: return S_AY;
      4: return S_BY;
      5: return S_AZ;
      default: return S_BZ;
    endcase
  endfunction

  // Saturate a wide signed value to the datapath width
  function automatic logic [DW-1:0] sat_fx(input logic signed [63:0] x);
    localparam logic signed [63:0] MAXV = 64'sd131071;   // 2^(DW-1)-1
    localparam logic signed [63:0] MINV = -64'sd131072;
    if (x > MAXV) return MAXV[DW-1:0];
    if (x < MINV) return MINV[DW-1:0];
    return x[DW-1:0];
  endfunction

endpackage
