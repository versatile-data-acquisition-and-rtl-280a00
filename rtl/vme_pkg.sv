// vme_pkg: types and constants shared by the VME interface and the
// application blocks.
//
// VME address-modifier (AM) codes are those of the VME standard for the
// A16 and A24 spaces the boards answer in. The local bus is the
// single-word request/acknowledge bus the VME slave drives; the register
// bus is the 8-bit register interface every application block presents.
package vme_pkg;

  // Address-modifier codes (VME standard).
  localparam logic [5:0] AM_A16_SUP   = 6'h2D;
  localparam logic [5:0] AM_A16_USR   = 6'h29;
  localparam logic [5:0] AM_A24_SUP_D = 6'h3D;  // supervisory data
  localparam logic [5:0] AM_A24_SUP_P = 6'h3E;  // supervisory program
  localparam logic [5:0] AM_A24_SUP_B = 6'h3F;  // supervisory block transfer
  localparam logic [5:0] AM_A24_USR_D = 6'h39;
  localparam logic [5:0] AM_A24_USR_P = 6'h3A;
  localparam logic [5:0] AM_A24_USR_B = 6'h3B;

  typedef enum logic [1:0] {SP_NONE = 2'd0, SP_A16 = 2'd1, SP_A24 = 2'd2} vme_space_e;

  // Request from the VME slave to the board's local resources. One
  // request is one 16-bit word with byte enables: be[1] is the even byte
  // (D15..D8, VME DS1), be[0] the odd byte (D7..D0, VME DS0).
  typedef struct packed {
    logic        valid;
    logic        we;
    vme_space_e  space;
    logic [23:1] addr;
    logic [1:0]  be;
    logic [15:0] wdata;
  } lbus_req_t;

  // 8-bit register bus presented to each application block. Writes take
  // effect at the clock edge where wr is high; read data is combinational
  // from addr. rd marks the cycle a read is taken (for read-to-clear).
  typedef struct packed {
    logic       wr;
    logic       rd;
    logic [7:0] addr;
    logic [7:0] wdata;
  } reg_req_t;

  // Classify an address modifier.
  function automatic vme_space_e am_space(input logic [5:0] am);
    case (am)
      AM_A16_SUP, AM_A16_USR: return SP_A16;
      AM_A24_SUP_D, AM_A24_SUP_P, AM_A24_SUP_B,
      AM_A24_USR_D, AM_A24_USR_P, AM_A24_USR_B: return SP_A24;
      default: return SP_NONE;
    endcase
  endfunction

  function automatic logic am_is_blt(input logic [5:0] am);
    return (am == AM_A24_SUP_B) || (am == AM_A24_USR_B);
  endfunction

endpackage
