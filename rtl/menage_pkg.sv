// menage_pkg: types shared by the MENAGE cores.
//
// cfg_sel_e selects which on-core memory a configuration write goes to. The
// configuration port itself is this design's choice; the paper only says that
// the mapping results are stored as configuration bits in the internal memories.
// ctrl_state_e is the state of the memory-based event controller.
package menage_pkg;

  typedef enum logic [2:0] {
    CFG_E2A    = 3'd0,  // one MEM_E2A row {B, A}
    CFG_SN     = 3'd1,  // one MEM_S&N row {WI, VNI, NI}
    CFG_WEIGHT = 3'd2,  // one 8-bit weight of A-Syn cfg_idx
    CFG_SLOT   = 3'd3,  // neuron index of a (A-Neuron, capacitor) slot; clears it
    CFG_VTH    = 3'd4   // firing threshold shared by the core's A-Neurons
  } cfg_sel_e;

  typedef enum logic [2:0] {
    CS_IDLE     = 3'd0,  // poll MEM_E
    CS_LOOKUP   = 3'd1,  // MEM_E2A word arriving
    CS_DISPATCH = 3'd2,  // reading B rows of MEM_S&N
    CS_DRAIN    = 3'd3,  // step marker seen: wait for pulses in flight
    CS_LEAK     = 3'd4,  // one-cycle leak command
    CS_MARK     = 3'd5   // wait for the event generator, then forward the marker
  } ctrl_state_e;

endpackage
