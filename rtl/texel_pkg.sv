// texel_pkg: sizes, packet formats, register map and bias-channel map shared by
// every block of the TEXEL neuromorphic processor model.
//
// The counts (2 cores, 90 neurons per core, 54 plastic + 4 static synapses per
// neuron, 64 registers of 23 bits, 94 DAC channels of 12 bits, 24 sADCs on a
// 5-bit bus) are the chip's. The packet layout, the assignment of register words
// and DAC channels to functions, and the integer units used by the behavioural
// analog models are this design's own choices; the chip documentation does not
// publish them.
//
// Units used by the behavioural analog models: currents are unsigned integers in
// pA, the analog weight V_w is in mV (0..1800), time advances one step per
// `tick` strobe.
package texel_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned NUM_CORES     = 2;
  localparam int unsigned NRN_PER_CORE  = 90;
  localparam int unsigned NUM_PLASTIC   = 54;
  localparam int unsigned NUM_STATIC    = 4;
  localparam int unsigned NUM_SYN       = NUM_PLASTIC + NUM_STATIC;  // 58
  localparam int unsigned REG_WORDS     = 64;
  localparam int unsigned REG_W         = 23;
  localparam int unsigned DAC_CH        = 94;
  localparam int unsigned DAC_W         = 12;
  localparam int unsigned SADC_PER_CORE = 12;
  localparam int unsigned SADC_ADDR_W   = 5;

  localparam int unsigned NRN_W  = 7;   // neuron index within a core
  localparam int unsigned SYN_W  = 6;   // synapse index within a neuron
  localparam int unsigned CH_W   = 7;   // DAC channel index
  localparam int unsigned RADDR_W = 6;  // register word index

  typedef logic [31:0] cur_t;           // current in pA
  localparam int unsigned VW_MAX = 1800; // V_w full scale in mV

  // ---------------- input packet (34 bits) ----------------
  // [33:31] opcode, [30] core, [29:0] payload
  //   SPIKE   : [12:6] neuron, [5:0] synapse
  //   REG_WR  : [28:23] register word, [22:0] data
  //   REG_RD  : [28:23] register word
  //   DAC_WR  : [18:12] channel, [11:0] code
  //   DAC_RD  : [18:12] channel
  //   WGT_WR  : [13] weight, [12:6] neuron, [5:0] plastic synapse
  //   WGT_RD  : [12:6] neuron, [5:0] plastic synapse
  localparam int unsigned IN_W = 34;
  typedef enum logic [2:0] {
    OP_SPIKE  = 3'd0,
    OP_REG_WR = 3'd1,
    OP_REG_RD = 3'd2,
    OP_DAC_WR = 3'd3,
    OP_DAC_RD = 3'd4,
    OP_WGT_WR = 3'd5,
    OP_WGT_RD = 3'd6,
    OP_NOP    = 3'd7
  } op_e;

  typedef struct packed {
    op_e         op;
    logic        core;
    logic [29:0] payload;
  } in_pkt_t;

  // Configuration command handed from the demux to a core.
  typedef struct packed {
    op_e         op;
    logic [29:0] payload;
  } cfg_cmd_t;

  // ---------------- output packet (32 bits) ----------------
  // [31:30] kind, [29] core, [28:23] address (register word / DAC channel low
  // bits), [22:0] data. Spike: data[6:0] = neuron. Weight read: data[0] = weight,
  // data[13:1] = {neuron, synapse}.
  localparam int unsigned OUT_W = 32;
  typedef enum logic [1:0] {
    K_SPIKE = 2'd0,
    K_REG   = 2'd1,
    K_DAC   = 2'd2,
    K_WGT   = 2'd3
  } kind_e;

  typedef struct packed {
    kind_e       kind;
    logic        core;
    logic [5:0]  addr;
    logic [22:0] data;
  } out_pkt_t;

  // ---------------- register map (per core) ----------------
  localparam int unsigned R_CTRL      = 0;  // see CTRL_* bits
  localparam int unsigned R_MONITOR   = 1;  // [6:0] neuron, [12:7] synapse
  localparam int unsigned R_READ_PW   = 2;  // device read pulse width, clock cycles
  localparam int unsigned R_WRITE_PW  = 3;  // device write pulse width, clock cycles
  localparam int unsigned R_SYN_TYPE0 = 4;  // plastic synapse rows 0..22, 1 = inhibitory
  localparam int unsigned R_SYN_TYPE1 = 5;  // rows 23..45
  localparam int unsigned R_SYN_TYPE2 = 6;  // rows 46..53 in [7:0]

  localparam int unsigned CTRL_PLAST_EN  = 0;  // on-chip learning enabled
  localparam int unsigned CTRL_DEV_EN    = 1;  // device mode: efficacy read from devices
  localparam int unsigned CTRL_CONT_READ = 2;  // continuous-read mode
  localparam int unsigned CTRL_PRECHG    = 3;  // IDLE pre-charge between reads
  localparam int unsigned CTRL_SADC_EN   = 4;  // sADC EN: monitored input (1) / off_bias (0)

  localparam logic [REG_W-1:0] READ_PW_RST  = 23'd4;
  localparam logic [REG_W-1:0] WRITE_PW_RST = 23'd8;

  // ---------------- DAC channel map (per core) ----------------
  // Neuron (seven biases of the soma, plus the DC input shared by all neurons)
  localparam int unsigned B_LEAK      = 0;
  localparam int unsigned B_GAIN      = 1;
  localparam int unsigned B_SPK_THR   = 2;
  localparam int unsigned B_REFR      = 3;
  localparam int unsigned B_EXP       = 4;
  localparam int unsigned B_AHP_W     = 5;
  localparam int unsigned B_AHP_LEAK  = 6;
  localparam int unsigned B_DC        = 7;
  // Four PSC DPIs: plastic exc, plastic inh, static exc, static inh
  localparam int unsigned B_PSC_GAIN0 = 8;   // 8..11
  localparam int unsigned B_PSC_LEAK0 = 12;  // 12..15
  // Static synapse weights (exc0, exc1, inh0, inh1)
  localparam int unsigned B_ST_W0     = 16;  // 16..19
  // Plastic synapse efficacies in CMOS mode
  localparam int unsigned B_W_HIGH    = 20;
  localparam int unsigned B_W_LOW     = 21;
  // Pre trace
  localparam int unsigned B_PRE_W     = 22;
  localparam int unsigned B_PRE_LEAK  = 23;
  localparam int unsigned B_PRE_THR_L = 24;
  localparam int unsigned B_PRE_THR_H = 25;
  // Weight update
  localparam int unsigned B_POT_GAIN  = 26;
  localparam int unsigned B_PRE_DEP   = 27;
  localparam int unsigned B_POST_DEP  = 28;
  localparam int unsigned B_SLEW_UP   = 29;
  localparam int unsigned B_SLEW_DN   = 30;
  localparam int unsigned B_BIST_THR  = 31;
  // Post trace and Ca2+ SoDPI
  localparam int unsigned B_POST_W    = 32;
  localparam int unsigned B_POST_LEAK = 33;
  localparam int unsigned B_POST_THR  = 34;
  localparam int unsigned B_CA_W      = 35;
  localparam int unsigned B_CA_LEAK1  = 36;
  localparam int unsigned B_CA_LEAK2  = 37;
  localparam int unsigned B_CA_THR_L  = 38;
  localparam int unsigned B_CA_THR_H  = 39;
  // Device interface
  localparam int unsigned B_NORM      = 40;  // norm_bias
  // sADC
  localparam int unsigned B_SADC_OFF  = 41;  // off_bias
  localparam int unsigned B_SADC_THR  = 42;  // ref_l + hys, as a charge level
  localparam int unsigned B_SADC_PWLK = 43;  // pwlk
  localparam int unsigned B_CAL       = 44;  // channel whose current is I_DAC

  // Monitor indices of the 12 sADCs of a core (one per current type)
  localparam int unsigned M_DAC = 0, M_PRE = 1, M_SO = 2, M_POST = 3, M_PLEFT = 4,
                          M_PRIGHT = 5, M_SEXC = 6, M_AHP = 7, M_FO = 8, M_SINH = 9,
                          M_DEVNEG = 10, M_DEVNORM = 11;

  // Per-core bias bundle handed to the behavioural models.
  typedef struct packed {
    cur_t leak, gain, spk_thr, refr, expg, ahp_w, ahp_leak, dc;
  } soma_bias_t;

  typedef struct packed {
    cur_t pre_w, pre_leak, pre_thr_l, pre_thr_h;
    cur_t pot_gain, pre_dep, post_dep, slew_up, slew_dn, bist_thr;
  } syn_bias_t;

  typedef struct packed {
    cur_t post_w, post_leak, post_thr, ca_w, ca_leak1, ca_leak2, ca_thr_l, ca_thr_h;
  } trace_bias_t;

  // Everything a neuron block takes from its core's DAC.
  typedef struct packed {
    soma_bias_t   soma;
    syn_bias_t    syn;
    trace_bias_t  tr;
    cur_t [3:0]   psc_gain;   // PSC DPIs: 0 plastic exc, 1 plastic inh, 2 static exc, 3 static inh
    cur_t [3:0]   psc_leak;
    cur_t [3:0]   st_w;       // static synapse weights: exc, exc, inh, inh
    cur_t         w_high, w_low, norm_bias;
  } nb_bias_t;

  // Mode bits and device pulse widths a neuron block takes from its core's registers.
  typedef struct packed {
    logic             plast_en, dev_en, cont_read, prechg;
    logic [REG_W-1:0] read_pw, write_pw;
  } nb_ctrl_t;

  // Signals of one neuron (and its selected synapse) offered to the monitors.
  typedef struct packed {
    cur_t        i_so, i_post, i_sexc, i_ahp, i_fo, i_sinh;   // neuron currents
    cur_t        i_pre, i_pleft, i_pright, i_devneg, i_devnorm; // synapse currents
    cur_t        i_mem;                                       // V_MEM proxy
    logic [10:0] vw;                                          // V_W of the synapse
    logic        ca_above, ca_below, post_above;              // neuron pins
    logic        w_syn, dev_read, dev_write, dev_int, dev_state; // synapse pins
  } mon_t;

  // Saturating helpers used by the behavioural models.
  function automatic cur_t sat_add(cur_t a, cur_t b);
    logic [32:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[32] ? 32'hFFFF_FFFF : s[31:0];
  endfunction

  function automatic cur_t sat_sub(cur_t a, cur_t b);
    return (a > b) ? a - b : 32'd0;
  endfunction

endpackage
