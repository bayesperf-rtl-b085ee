// bp_pkg: types, constants and fixed-point helpers shared by the BayesPerf
// expectation-propagation (EP) accelerator.
//
// Numbers are signed Q16.16 fixed point (fx_t, 32 bits); energies and sums
// that can grow past 16 integer bits use 48-bit Q32.16 (acc_t). Event values
// are expected to be normalised by the host (for example events per
// kilo-cycle) so that |value| stays below about 180 and its square fits Q16.16.
//
// The accelerator has K = 4 EP engines and 12 MCMC samplers on a 16-port
// network-on-chip (these three numbers follow the paper). The number of
// events per time slice (D), the flit format, the register map and the fixed
// point format are this design's own choices.
package bp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned K_EP        = 4;    // EP engines (paper)
  localparam int unsigned N_SAMPLERS  = 12;   // MCMC samplers (paper)
  localparam int unsigned N_PORTS     = 16;   // NoC ports (paper)
  localparam int unsigned D_EVENTS    = 8;    // events per time slice (assumed)
  localparam int unsigned SAMP_PER_EP = N_SAMPLERS / K_EP;
  localparam int unsigned PORT_W      = 4;    // log2(N_PORTS)
  localparam int unsigned ADDR_W      = 32;   // DRAM word address

  // ---------------------------------------------------------- fixed point
  localparam int unsigned FRAC = 16;
  typedef logic signed [31:0] fx_t;    // Q16.16
  typedef logic signed [47:0] acc_t;   // Q32.16
  localparam fx_t FX_ONE  = 32'sh0001_0000;
  localparam fx_t FX_HALF = 32'sh0000_8000;
  localparam fx_t FX_LN2  = 32'sd45426;          // ln(2) in Q16.16
  localparam fx_t FX_MAX  = 32'sh7FFF_FFFF;

  // Q16.16 x Q16.16 -> Q32.16 (no saturation needed: 64-bit product >> 16
  // keeps 48 bits, enough for two 32-bit operands).
  function automatic acc_t fx_mul_wide(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return acc_t'(p >>> FRAC);
  endfunction

  // Saturate a Q32.16 value to Q16.16.
  function automatic fx_t fx_sat(acc_t a);
    if (a > acc_t'(FX_MAX))       return FX_MAX;
    else if (a < -acc_t'(FX_MAX)) return -FX_MAX;
    else                          return fx_t'(a);
  endfunction

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    return fx_sat(fx_mul_wide(a, b));
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return (a < 0) ? -a : a;
  endfunction

  // -------------------------------------------------------- NoC flits
  // Every flit is one register write: dst/src port, register address, data.
  typedef struct packed {
    logic [PORT_W-1:0] dst;
    logic [PORT_W-1:0] src;
    logic [7:0]        addr;
    logic [31:0]       data;
  } flit_t;

  // Sampler register map (written by an EP). Index i is the event number.
  localparam logic [7:0] SR_CAV_MU   = 8'h00;  // 0x00+i cavity mean
  localparam logic [7:0] SR_CAV_PREC = 8'h10;  // 0x10+i cavity precision
  localparam logic [7:0] SR_OBS_VAL  = 8'h20;  // 0x20+i observed value
  localparam logic [7:0] SR_OBS_PREC = 8'h30;  // 0x30+i observation precision (0 = not observed)
  localparam logic [7:0] SR_COEF     = 8'h40;  // 0x40+i invariant coefficient a_i
  localparam logic [7:0] SR_KAPPA    = 8'h80;  // invariant weight
  localparam logic [7:0] SR_STEP     = 8'h81;  // proposal half-width
  localparam logic [7:0] SR_NSAMP    = 8'h82;  // [3:0] log2 kept samples, [31:16] burn-in
  localparam logic [7:0] SR_SEED     = 8'h83;  // URNG seed (write loads it)
  localparam logic [7:0] SR_START    = 8'h84;  // data[0] = warm start
  // Sampler results (written back into the EP).
  localparam logic [7:0] ER_MEAN     = 8'h00;  // 0x00+i sample mean
  localparam logic [7:0] ER_M2       = 8'h10;  // 0x10+i sample second moment
  localparam logic [7:0] ER_DONE     = 8'h20;  // data = accepted-proposal count

  // --------------------------------------------------- memory request bus
  // Valid/ready request, in-order single-word read responses.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [31:0]       wdata;
  } mem_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // ------------------------------------------- controller <-> EP bundles
  // Run-time settings, from the controller's registers.
  typedef struct packed {
    fx_t         kappa;      // invariant weight
    fx_t         step;       // proposal half-width
    logic [3:0]  log2_nsamp; // kept samples = 2^log2_nsamp
    logic [15:0] burnin;     // discarded samples
    fx_t         tol;        // convergence tolerance on |Delta|
  } ep_cfg_t;

endpackage
