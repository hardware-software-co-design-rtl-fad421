// bike_hwsw_top: the programmable-logic part of the BIKE hardware/software
// co-design in its largest configuration (the Zynq Z-7020 one): the key
// generation and the decapsulation accelerators side by side, while
// encapsulation runs in software on the processor.
//
// The two accelerators are independent; each has its own SHA-3/SHAKE sponge,
// multiplier and control, and both may run at the same time. The processor (not
// part of this RTL) starts them, feeds the TRNG values and ciphertexts, and reads
// results through the plain ports below: kg_* for key generation (seed and
// sigma from the TRNG, h0/h1/h read back by word), dc_* for decapsulation
// (private key and c0 loaded by word, c1 = m' and sigma as ports, the 256-bit
// shared key out). Each accelerator's `done` pulses for one cycle.
// The paper gives the split between hardware and software; the port-level
// interface (the bus to the processor is not described) is this design's own.
module bike_hwsw_top
  import bike_pkg::*;
#(
  parameter int unsigned R        = R_L1,
  parameter int unsigned D        = D_L1,
  parameter int unsigned T        = T_L1,
  parameter int unsigned LEVELS   = 1,
  parameter int unsigned MAX_ITER = 20,
  parameter int unsigned THR_MUL  = THR_MUL_L1,
  parameter int unsigned THR_ADD  = THR_ADD_L1,
  parameter int unsigned THR_MIN  = THR_MIN_L1,
  localparam int unsigned NW      = poly_words(R, LEVELS),
  localparam int unsigned AW      = clog2(NW),
  localparam int unsigned ITW     = clog2(MAX_ITER + 1)
)(
  input  logic           clk,
  input  logic           rst_n,
  // key generation
  input  logic           kg_start,
  input  logic [31:0]    kg_seed,
  input  logic [255:0]   kg_sigma_trng,
  output logic           kg_busy,
  output logic           kg_done,
  input  logic [1:0]     kg_rd_sel,
  input  logic [AW-1:0]  kg_rd_addr,
  output logic [63:0]    kg_rd_data,
  output logic [255:0]   kg_sigma,
  // decapsulation
  input  logic           dc_ld_we,
  input  logic [1:0]     dc_ld_sel,
  input  logic [AW-1:0]  dc_ld_addr,
  input  logic [63:0]    dc_ld_wdata,
  input  logic [255:0]   dc_m_prime,
  input  logic [255:0]   dc_sigma,
  input  logic           dc_start,
  output logic           dc_busy,
  output logic           dc_done,
  output logic [255:0]   dc_key,
  output logic           dc_accepted,
  output logic           dc_dec_success,
  output logic [ITW-1:0] dc_dec_iters
);

  keygen_accel #(.R(R), .D(D), .LEVELS(LEVELS)) u_keygen (
    .clk(clk), .rst_n(rst_n), .start(kg_start), .seed(kg_seed), .sigma_trng(kg_sigma_trng),
    .busy(kg_busy), .done(kg_done), .rd_sel(kg_rd_sel), .rd_addr(kg_rd_addr),
    .rd_data(kg_rd_data), .sigma(kg_sigma)
  );

  decaps_accel #(
    .R(R), .D(D), .T(T), .LEVELS(LEVELS), .MAX_ITER(MAX_ITER),
    .THR_MUL(THR_MUL), .THR_ADD(THR_ADD), .THR_MIN(THR_MIN)
  ) u_decaps (
    .clk(clk), .rst_n(rst_n), .ld_we(dc_ld_we), .ld_sel(dc_ld_sel), .ld_addr(dc_ld_addr),
    .ld_wdata(dc_ld_wdata), .m_prime(dc_m_prime), .sigma(dc_sigma), .start(dc_start),
    .busy(dc_busy), .done(dc_done), .key(dc_key), .accepted(dc_accepted),
    .dec_success(dc_dec_success), .dec_iters(dc_dec_iters)
  );

endmodule
