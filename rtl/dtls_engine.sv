// DTLS engine (DE): memory-mapped crypto subsystem of the SoC.
//
// Holds the 2 KB DTLS RAM, the DTLS controller with its HMAC-DRBG and
// session-hash finisher, and the three accelerators: SHA-256 (shared by the
// DRBG and the finisher), AES-128 GCM and the prime-curve ECC engine with
// its comb cache.
// The processor writes operands into the accelerator configuration region of
// the RAM, writes a command, and can then sleep until the completion
// interrupt; results are read back from the same region.
//
// Clocking: the engine logic runs on `crypto_clk`, produced by the clock
// divider as CLK with pulses removed, so each crypto_clk edge coincides with a
// CLK edge on which `crypto_tick` is high. The bus side runs on `clk` (CLK):
// a request is granted only on a tick, so the engine samples it on its own
// edge, and `rvalid` is raised for one CLK cycle after the grant while the
// read data, registered on that edge, is stable.
//
// Address map (byte offsets within the engine's 4 KB window): 0x000-0x7FF the
// RAM, 0x800-0x810 the controller registers (see dtls_pkg). The processor
// must not use the RAM while a command runs: such accesses wait (no grant)
// until the engine is idle. Register accesses are always granted on a tick.
// The block structure follows the paper's Fig. 4; the register map and bus
// handshake are this design's own.
//
// Lint note: the accelerators' `busy` outputs are left open on purpose;
// the controller tracks each command itself and waits for `done`.
module dtls_engine
  import dtls_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 6
) (
  input  logic     clk,          // bus clock (CLK)
  input  logic     crypto_clk,   // engine clock (divided CLK)
  input  logic     crypto_tick,  // high in CLK cycles that end in a crypto_clk edge
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  output logic     irq,
  output logic     busy,
  output logic [31:0] ecc_dbl_count,
  output logic [31:0] ecc_add_count
);
  // ---------------- bus decode ----------------
  logic is_reg, gnt, rd_reg;
  assign is_reg = bus_req.addr[11];
  assign gnt    = bus_req.req && crypto_tick && (is_reg || !busy);

  logic rvalid_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= gnt && !bus_req.we;

  always_ff @(posedge crypto_clk or negedge rst_n)
    if (!rst_n)   rd_reg <= 1'b0;
    else if (gnt) rd_reg <= is_reg;

  // ---------------- controller ----------------
  logic        c_ram_en, c_ram_we;
  logic [8:0]  c_ram_addr;
  logic [31:0] c_ram_wdata, ram_rdata, reg_rdata;
  logic [31:0] opbuf [OPBUF_WORDS];
  logic [6:4]  subop;
  logic        sha_start, sha_init, sha_done;
  logic [255:0] sha_digest;
  logic        gcm_start, gcm_done;
  logic [127:0] gcm_dout;
  logic        ecc_start, ecc_done, ecc_err, ecc_inf;
  logic [255:0] ecc_rx, ecc_ry;
  logic        drbg_start, drbg_done, drbg_busy;
  logic [255:0] drbg_out;
  logic        sha_done_core;
  logic        fin_start, fin_done, fin_busy;

  dtls_controller u_ctrl (
    .clk(crypto_clk), .rst_n,
    .reg_we(gnt && is_reg && bus_req.we), .reg_addr(bus_req.addr[11:0]),
    .reg_wdata(bus_req.wdata), .reg_rdata,
    .ram_en(c_ram_en), .ram_we(c_ram_we), .ram_addr(c_ram_addr),
    .ram_wdata(c_ram_wdata), .ram_rdata,
    .opbuf, .subop,
    .sha_start, .sha_init, .sha_done, .sha_digest,
    .gcm_start, .gcm_done, .gcm_dout,
    .ecc_start, .ecc_done, .ecc_err, .ecc_inf, .ecc_rx, .ecc_ry,
    .fin_start, .fin_done,
    .drbg_start, .drbg_done, .drbg_out,
    .busy, .irq
  );

  // ---------------- DTLS RAM: controller while busy, else the bus ----------------
  logic        ram_en, ram_we;
  logic [3:0]  ram_be;
  logic [8:0]  ram_addr;
  logic [31:0] ram_wdata;
  always_comb begin
    if (busy) begin
      ram_en = c_ram_en; ram_we = c_ram_we; ram_be = 4'hf;
      ram_addr = c_ram_addr; ram_wdata = c_ram_wdata;
    end else begin
      ram_en = gnt && !is_reg; ram_we = bus_req.we; ram_be = bus_req.be;
      ram_addr = bus_req.addr[10:2]; ram_wdata = bus_req.wdata;
    end
  end

  dtls_ram u_ram (
    .clk(crypto_clk), .en(ram_en), .we(ram_we), .be(ram_be), .addr(ram_addr),
    .wdata(ram_wdata), .rdata(ram_rdata)
  );

  assign bus_rsp.gnt    = gnt;
  assign bus_rsp.rvalid = rvalid_q;
  assign bus_rsp.rdata  = rd_reg ? reg_rdata : ram_rdata;

  // ---------------- accelerators ----------------
  logic [511:0] sha_block;
  always_comb
    for (int i = 0; i < 16; i++) sha_block[511 - 32*i -: 32] = opbuf[i];

  // the SHA-256 core is shared: the DRBG or the session-hash finisher drives
  // it while running, and its completions are then hidden from the controller
  logic         d_sha_start, d_sha_init, f_sha_start, f_sha_init;
  logic [511:0] d_sha_block, f_sha_block;
  logic         c_start, c_init;
  logic [511:0] c_block;
  always_comb begin
    if (drbg_busy) begin
      c_start = d_sha_start; c_init = d_sha_init; c_block = d_sha_block;
    end else if (fin_busy) begin
      c_start = f_sha_start; c_init = f_sha_init; c_block = f_sha_block;
    end else begin
      c_start = sha_start; c_init = sha_init; c_block = sha_block;
    end
  end
  sha256_core u_sha (
    .clk(crypto_clk), .rst_n, .start(c_start), .init(c_init), .block(c_block),
    .busy(), .done(sha_done_core), .digest(sha_digest)
  );
  assign sha_done = sha_done_core && !drbg_busy && !fin_busy;

  sha_finish u_fin (
    .clk(crypto_clk), .rst_n, .start(fin_start), .first(subop[4]), .data(sha_block),
    .nbytes(opbuf[24][5:0]), .len_bits({opbuf[25], opbuf[26]}), .busy(fin_busy), .done(fin_done),
    .sha_start(f_sha_start), .sha_init(f_sha_init), .sha_block(f_sha_block),
    .sha_done(sha_done_core)
  );

  hmac_drbg u_drbg (
    .clk(crypto_clk), .rst_n, .start(drbg_start), .op(subop[5:4]),
    .seed(sha_block[511:256]), .busy(drbg_busy), .done(drbg_done), .out(drbg_out),
    .sha_start(d_sha_start), .sha_init(d_sha_init), .sha_block(d_sha_block),
    .sha_done(sha_done_core), .sha_digest
  );

  aes_gcm u_gcm (
    .clk(crypto_clk), .rst_n, .start(gcm_start), .op(gcm_op_e'(subop)),
    .din({opbuf[0], opbuf[1], opbuf[2], opbuf[3]}), .nbytes(opbuf[4][4:0]),
    .busy(), .done(gcm_done), .dout(gcm_dout)
  );

  logic [255:0] ek, ex, ey, ep, ea;
  always_comb
    for (int i = 0; i < 8; i++) begin
      ek[32*i +: 32] = opbuf[i];
      ex[32*i +: 32] = opbuf[8 + i];
      ey[32*i +: 32] = opbuf[16 + i];
      ep[32*i +: 32] = opbuf[24 + i];
      ea[32*i +: 32] = opbuf[32 + i];
    end

  ecc_core #(.NUM_SLOTS(NUM_SLOTS)) u_ecc (
    .clk(crypto_clk), .rst_n, .start(ecc_start), .op(ecc_op_e'(subop)),
    .slot(opbuf[40][11:9]), .nbits(opbuf[40][8:0]),
    .k(ek), .x(ex), .y(ey), .p(ep), .a(ea),
    .busy(), .done(ecc_done), .err(ecc_err), .inf(ecc_inf), .rx(ecc_rx), .ry(ecc_ry),
    .n_dbl(ecc_dbl_count), .n_add(ecc_add_count)
  );

endmodule
