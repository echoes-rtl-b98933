// echoes_pkg: types and constants shared by the SoC blocks.
//
// tcdm_req_t / tcdm_rsp_t form the single-cycle memory port used between
// masters (FFT HWPE, core, uDMA), the low-latency interconnect and the SRAM
// banks: a master holds req with a stable address until gnt; the response
// (rvalid, rdata) follows exactly one cycle after the grant, for reads and
// writes alike.  The same struct is used bank-side, where addr carries the
// word index inside the bank.  apb_req_t / apb_rsp_t carry the configuration
// bus from the core to the FFT HWPE and I2S register files (zero wait state).
// The address map and register maps are this design's own choice.
package echoes_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  typedef struct packed {
    logic        psel;
    logic        penable;
    logic        pwrite;
    logic [11:0] paddr;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic [31:0] prdata;
    logic        pready;
    logic        pslverr;
  } apb_rsp_t;

  // FFT sample formats: complex fixed point with 32/16/8-bit parts.
  typedef enum logic [1:0] {
    DT_C64 = 2'd0,
    DT_C32 = 2'd1,
    DT_C16 = 2'd2
  } fft_dtype_e;

  // One complex operand of the butterfly datapath, sign-extended to 32 bits.
  typedef struct packed {
    logic signed [31:0] re;
    logic signed [31:0] im;
  } cplx_t;

  // One entry of an FFT write port: word address, data and byte enables.
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] data;
    logic [3:0]  be;
  } fft_wr_t;

  // Configuration of one I2S interface (register RX_CFG / TX_CFG).
  typedef struct packed {
    logic [3:0] ndev_m1;      // devices on the line minus one (1..16)
    logic [4:0] wlen_m1;      // bits per channel word minus one (1..32)
    logic       align;        // 1: first bit one BCLK after the FSYNC edge
    logic       pol;          // 1: sample on falling, drive on rising BCLK
    logic       ext_clk;      // 1: BCLK/FSYNC come from the pads
    logic       pdm_en;       // receive side: take the PDM stream
    logic       dsp_en;       // 1: TDM DSP mode, 0: standard / TDM I2S
    logic       en;
  } i2s_cfg_t;

  // Memory map (byte addresses).
  localparam logic [31:0] PRIV_BASE = 32'h1C00_0000;  // 2 x 32 KiB, contiguous
  localparam logic [31:0] L2_BASE   = 32'h1C01_0000;  // 256 KiB, word interleaved

  // Bytes per sample and maximum log2(points) of each FFT data type.
  function automatic int unsigned fft_sample_bytes(fft_dtype_e dt);
    case (dt)
      DT_C64:  return 8;
      DT_C32:  return 4;
      default: return 2;
    endcase
  endfunction

  function automatic logic [3:0] fft_log2n_max(fft_dtype_e dt);
    case (dt)
      DT_C64:  return 4'd9;
      DT_C32:  return 4'd10;
      default: return 4'd11;
    endcase
  endfunction

endpackage
