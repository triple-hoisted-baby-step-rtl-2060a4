// helt_pkg: types and constants shared by the HE linear-transform accelerator.
//
// Holds the coefficient word width, the eight PE operating modes, the nine
// PE multiplexer select bits s0..s8 and the table that maps a mode to those
// bits, and the command format accepted by the top-level controller.
//
// The mode list and the select-bit values follow the PE configuration table
// of the design (NTT, INTT, CWPM, CWPA, CM, CWPA-CM, CM-ACC, CWPM-ACC).
// Entries printed there as "don't care" are driven as 0 here; that choice,
// the command encoding and all field widths are this implementation's own.
package helt_pkg;

  // Coefficient width of one RNS residue (54 bits in the reference design).
  localparam int unsigned W_DEF = 54;

  typedef enum logic [2:0] {
    PE_NTT      = 3'd0,
    PE_INTT     = 3'd1,
    PE_CWPM     = 3'd2,
    PE_CWPA     = 3'd3,
    PE_CM       = 3'd4,
    PE_CWPA_CM  = 3'd5,
    PE_CM_ACC   = 3'd6,
    PE_CWPM_ACC = 3'd7
  } pe_mode_e;

  // Multiplexer selects of one PE.
  //  s0     : lower adder second operand   1 = multiplier output, 0 = a1 (subtracted)
  //  s1     : upper adder first operand    1 = a0, 0 = accumulator register D
  //  s2     : upper adder second operand   1 = a1, 0 = multiplier output
  //  s3s4   : multiplier operand X         00 = a1, 01 = (lower sum)/2, 10 = a0, 11 = lower sum
  //  s5     : multiplier operand Y         1 = a1, 0 = tf/c
  //  s6     : out1 select                  1 = lower sum, 0 = multiplier output
  //  s7s8   : out0 select                  00 = upper sum, 01 = multiplier, 10 = (upper sum)/2
  typedef struct packed {
    logic       s0;
    logic       s1;
    logic       s2;
    logic [1:0] s34;
    logic       s5;
    logic       s6;
    logic [1:0] s78;
  } pe_ctrl_t;

  function automatic pe_ctrl_t pe_ctrl_of(pe_mode_e m);
    pe_ctrl_t c;
    unique case (m)
      //                  s0    s1    s2    s3s4   s5    s6    s7s8
      PE_NTT:      c = '{1'b1, 1'b1, 1'b0, 2'b00, 1'b0, 1'b1, 2'b00};
      PE_INTT:     c = '{1'b0, 1'b1, 1'b1, 2'b01, 1'b0, 1'b0, 2'b10};
      PE_CWPM:     c = '{1'b0, 1'b0, 1'b0, 2'b10, 1'b1, 1'b0, 2'b01};
      PE_CWPA:     c = '{1'b0, 1'b1, 1'b1, 2'b00, 1'b0, 1'b0, 2'b00};
      PE_CM:       c = '{1'b0, 1'b0, 1'b0, 2'b10, 1'b0, 1'b0, 2'b01};
      PE_CWPA_CM:  c = '{1'b0, 1'b0, 1'b0, 2'b11, 1'b0, 1'b0, 2'b01};
      PE_CM_ACC:   c = '{1'b0, 1'b0, 1'b0, 2'b10, 1'b0, 1'b0, 2'b00};
      PE_CWPM_ACC: c = '{1'b0, 1'b0, 1'b0, 2'b10, 1'b1, 1'b0, 2'b00};
      default:     c = '0;
    endcase
    return c;
  endfunction

  // Operations the top-level controller dispatches.
  typedef enum logic [1:0] {
    OP_NTT  = 2'd0,   // forward NTT of one polynomial limb, in place
    OP_INTT = 2'd1,   // inverse NTT of one polynomial limb, in place
    OP_CW   = 2'd2,   // coefficient-wise operation (any of the six CW modes)
    OP_AUTO = 2'd3    // automorphism phi_r in the NTT domain, in place
  } op_e;

  // One command. Slot numbers index polynomial limbs in the scratchpad
  // (a slot is N/d_p rows); twiddle slots index the twiddle scratchpad.
  typedef struct packed {
    op_e        op;
    pe_mode_e   mode;      // OP_CW only
    logic [7:0] slot_a;    // operand A / NTT / automorphism slot
    logic [7:0] slot_b;    // operand B
    logic [7:0] slot_d;    // destination
    logic [7:0] nterms;    // ACC modes: number of accumulated terms (>=1)
    logic [7:0] tw_slot;   // NTT/INTT: first twiddle slot
    logic [5:0] mod_idx;   // register-file modulus index
    logic [7:0] const_idx; // register-file constant index (first term)
    logic [31:0] galois;   // OP_AUTO: odd g_r; limb b(X) becomes b(X^(g_r^-1))
  } cmd_t;

endpackage
