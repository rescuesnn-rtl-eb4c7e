// fam_pkg: the software side of fault-aware mapping, used by the testbenches
// as an independent reference.
//
// Given the fault map of one 8-bit weight register (bit p set = cell p is
// faulty), fam_shift() returns the rotation s with which a weight w is
// stored as ror8(w, s): the longest circular run of fault-free cells,
// scanned from a faulty cell towards the LSB (wrapping from cell 0 to cell 7),
// receives bits 7, 6, ... of the weight, so the most significant bits avoid
// the faulty cells. Examples: faults {5} -> s = 3; {6,4} -> s = 4;
// {5,2} -> s = 6; {1} -> s = 7. A fault-free register gives s = 0.
// rol8(ror8(w, s), s) == w.
package fam_pkg;

  function automatic logic [7:0] rol8(input logic [7:0] d, input int unsigned s);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = d[(i + 8 - (s % 8)) % 8];
    return r;
  endfunction

  function automatic logic [7:0] ror8(input logic [7:0] d, input int unsigned s);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = d[(i + (s % 8)) % 8];
    return r;
  endfunction

  function automatic logic [2:0] fam_shift(input logic [7:0] fmask);
    int best_len, best_start, len, p;
    best_len   = -1;
    best_start = 7;
    if (fmask == 8'h00) return 3'd0;
    for (int f = 7; f >= 0; f--) begin
      if (fmask[f]) begin
        len = 0;
        p   = (f + 7) % 8;
        while (!fmask[p] && len < 8) begin
          len++;
          p = (p + 7) % 8;
        end
        if (len > best_len) begin
          best_len   = len;
          best_start = (f + 7) % 8;
        end
      end
    end
    return 3'((7 - best_start + 8) % 8);
  endfunction

  // Weight the datapath sees when w is stored with rotation s in a register
  // with the given stuck-at masks.
  function automatic logic [7:0] seen_weight(input logic [7:0] w, input logic [2:0] s,
                                             input logic [7:0] sa0, input logic [7:0] sa1);
    return rol8((ror8(w, int'(s)) & ~sa0) | sa1, int'(s));
  endfunction

  // Reference model of one LIF neuron time step (see lif_neuron for the
  // rules). Fault codes: 0 none, 1 Vmem increase, 2 Vmem leak, 3 Vmem
  // reset, 4 spike generation.
  typedef struct packed {
    logic [31:0] vmem;
    logic [2:0]  tref;
    logic        spike;
    logic        stuck;
  } nstate_t;

  function automatic nstate_t lif_ref_step(input nstate_t s, input logic [31:0] wgh,
                                           input logic [31:0] vth, input logic [31:0] vreset,
                                           input logic [31:0] vleak, input int fault,
                                           input int unsigned refrac);
    nstate_t n;
    longint unsigned v;
    logic fire;
    n = s;
    if (wgh != 0) begin
      v = longint'(s.vmem) + longint'(wgh);
      if (v > 64'hFFFF_FFFF) v = 64'hFFFF_FFFF;
      if (fault == 1) v = 64'(s.vmem);
    end else begin
      if (fault == 2)          v = 64'(s.vmem);
      else if (s.vmem > vleak) v = 64'(s.vmem - vleak);
      else                     v = 0;
    end
    fire = (s.vmem >= vth);
    if (fault == 3) begin
      n.spike = fire || s.stuck;
      n.stuck = n.spike;
      n.vmem  = v[31:0];
    end else begin
      n.spike = fire;
      n.stuck = 1'b0;
      n.vmem  = fire ? vreset : v[31:0];
    end
    if (s.spike)         n.tref = 3'(refrac);
    else if (s.tref > 0) n.tref = s.tref - 1;
    return n;
  endfunction

  function automatic logic lif_ref_out(input nstate_t s, input int fault);
    if (fault == 4) return 1'b0;
    if (fault == 3) return s.spike;
    return (s.tref == 0) && s.spike;
  endfunction

endpackage
