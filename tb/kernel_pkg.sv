// kernel_pkg: builds the matrix-vector program y = A x (binary64) that the
// core-complex, cluster and chiplet testbenches run. Its hot loop is the
// paper's example: four fmv.d to clear four accumulators, an frep over four
// fmadd.d that read A and x through the SSRs ft0/ft1, four fsd, and the
// integer bookkeeping addi/addi/bltu.
//
// Each core computes R rows starting at row (hart_id mod 8) * R. The SSR
// loop nests are: A: (4 rows, stride 8N) x (N columns, stride 8) x (R/4 row
// blocks, stride 32N); x: (4, stride 0) x (N, stride 8) x (R/4, stride 0).
// With use_dma set, core 0 of the cluster first copies A, x and a zero word
// from global memory into the TCDM with the DMA, releases the other cores
// through a flag word (odd clusters first wait about 2000 cycles, so that
// their transfers into the TCDM overlap the even clusters' transfers out), waits for their done flags and copies y out to
// y_out + (cluster index) * 512 bytes.
package kernel_pkg;
  import manticore_pkg::*;
  import rv_asm_pkg::*;

  typedef logic [31:0] prog_t [$];

  // load a 32-bit constant
  function automatic void li(ref prog_t p, input int rd, input logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    p.push_back(lui(rd, int'(hi[31:12])));
    p.push_back(addi(rd, rd, int'({{20{v[11]}}, v[11:0]})));
  endfunction

  // TCDM layout: A at TCDM_BASE, x after A, zero word, y, flags
  function automatic logic [31:0] a_addr(int n);    return TCDM_BASE; endfunction
  function automatic logic [31:0] x_addr(int n);    return TCDM_BASE + 32'(8 * n * n); endfunction
  function automatic logic [31:0] zero_addr(int n); return x_addr(n) + 32'(8 * n); endfunction
  function automatic logic [31:0] y_addr(int n);    return ((zero_addr(n) + 32'd64 + 32'd63) & ~32'd63); endfunction
  function automatic logic [31:0] flag_addr(int n); return y_addr(n) + 32'(((8 * n + 63) / 64) * 64); endfunction
  // bytes copied in: A, x and the zero word, rounded up to whole lines
  function automatic int in_bytes(int n); return ((8 * n * n + 8 * n + 8 + 63) / 64) * 64; endfunction
  function automatic int out_bytes(int n); return ((8 * n + 63) / 64) * 64; endfunction

  localparam logic [31:0] GO   = 32'h600D_0001;
  localparam logic [31:0] DONE = 32'h600D_0002;

  // n: matrix size, r: rows per core (multiple of 4), ncores: cores taking part
  function automatic prog_t matvec(int n, int r, int ncores, bit use_dma,
                                   logic [31:0] src_global, logic [31:0] y_out);
    prog_t p;
    int l_wait, l_mul, l_loop, l_poll, l_done;
    // x6 = local core index, x7 = row byte offset (idx*r*8n), x9 = y offset (idx*r*8)
    p.push_back(csrr(6, 12'hF14));
    p.push_back(i_type(7, 6, 7, 6, 7'b0010011));          // andi x6, x6, 7
    p.push_back(addi(7, 0, 0));
    p.push_back(addi(9, 0, 0));
    li(p, 8, 32'(r * 8 * n));
    li(p, 16, 32'(r * 8));
    li(p, 18, flag_addr(n));
    l_mul = p.size();
    p.push_back(beq(6, 0, 20));
    p.push_back(add(7, 7, 8));
    p.push_back(add(9, 9, 16));
    p.push_back(addi(6, 6, -1));
    p.push_back(jal(0, -16));
    p.push_back(csrr(6, 12'hF14));
    p.push_back(i_type(7, 6, 7, 6, 7'b0010011));           // x6 = local index again
    if (use_dma) begin
      // core 0: clear done flags, DMA in, release the others; others: wait
      l_wait = p.size();
      p.push_back(beq(6, 0, 16));
      p.push_back(lw(17, 18, 0));
      li(p, 19, GO);
      p.push_back(bne(17, 19, -12));
      // (cores != 0 jump past the core-0 block below)
      p.push_back(jal(0, 0));  // patched
      l_poll = p.size() - 1;
      // stagger the clusters: odd clusters wait 640 loop turns
      p.push_back(csrr(23, 12'hF14));
      p.push_back(i_type(3, 23, 5, 23, 7'b0010011));       // srli x23, x23, 3
      p.push_back(i_type(1, 23, 7, 23, 7'b0010011));       // andi x23, x23, 1
      p.push_back(beq(23, 0, 12));
      li(p, 23, 32'd640);
      p.push_back(beq(23, 0, 12));
      p.push_back(addi(23, 23, -1));
      p.push_back(jal(0, -8));
      for (int c = 1; c < 8; c++) p.push_back(sw(0, 18, 64 + 4 * c));
      li(p, 20, PERIPH_BASE);
      li(p, 21, src_global);        p.push_back(sw(21, 20, 8'h00)); p.push_back(sw(0, 20, 8'h04));
      li(p, 21, TCDM_BASE);         p.push_back(sw(21, 20, 8'h08)); p.push_back(sw(0, 20, 8'h0C));
      li(p, 21, 32'(in_bytes(n)));  p.push_back(sw(21, 20, 8'h10));
      p.push_back(sw(21, 20, 8'h14));                       // start
      p.push_back(lw(22, 20, 8'h18));
      p.push_back(bne(22, 0, -4));                          // wait while busy
      li(p, 19, GO);
      p.push_back(sw(19, 18, 0));
      // patch: a core != 0 arriving at l_wait+... jumps here after seeing GO
      p[l_poll] = jal(0, 4 * (p.size() - l_poll));
      // core 0 falls through to here as well; core 0 skipped the wait via beq
      p[l_wait] = beq(6, 0, 4 * (l_poll + 1 - l_wait));
    end
    // ---- SSR configuration ----
    li(p, 20, SSR_BASE);
    p.push_back(addi(5, 0, 3));          p.push_back(sw(5, 20, 12'h000)); p.push_back(sw(5, 20, 12'h100));
    li(p, 5, 32'(n - 1));                p.push_back(sw(5, 20, 12'h004)); p.push_back(sw(5, 20, 12'h104));
    li(p, 5, 32'(r / 4 - 1));            p.push_back(sw(5, 20, 12'h008)); p.push_back(sw(5, 20, 12'h108));
    li(p, 5, 32'(8 * n));                p.push_back(sw(5, 20, 12'h020));
    p.push_back(addi(5, 0, 8));          p.push_back(sw(5, 20, 12'h024)); p.push_back(sw(5, 20, 12'h124));
    li(p, 5, 32'(32 * n));               p.push_back(sw(5, 20, 12'h028));
    p.push_back(sw(0, 20, 12'h120));     p.push_back(sw(0, 20, 12'h128));
    p.push_back(addi(5, 0, 2));          p.push_back(sw(5, 20, 12'h040)); p.push_back(sw(5, 20, 12'h140));
    li(p, 5, 1);                         p.push_back(sw(5, 20, 12'h7C0));   // enable streams
    li(p, 5, a_addr(n));                 p.push_back(add(5, 5, 7)); p.push_back(sw(5, 20, 12'h060));
    li(p, 5, x_addr(n));                 p.push_back(sw(5, 20, 12'h160));
    // ---- loop registers: t0 = N, fa1 = 0.0, a5 = &y[row0], a4 = 0, a1 = R ----
    li(p, 5, 32'(n));
    li(p, 21, zero_addr(n));
    p.push_back(fld(11, 21, 0));
    li(p, 15, y_addr(n));                p.push_back(add(15, 15, 9));
    p.push_back(addi(14, 0, 0));
    li(p, 11, 32'(r));
    // ---- the paper's loop (16 instructions) ----
    l_loop = p.size();
    p.push_back(fmv_d(15, 11)); p.push_back(fmv_d(12, 11)); p.push_back(fmv_d(13, 11)); p.push_back(fmv_d(14, 11));
    p.push_back(frep(5, 4));
    p.push_back(fmadd_d(15, 0, 1, 15)); p.push_back(fmadd_d(12, 0, 1, 12));
    p.push_back(fmadd_d(13, 0, 1, 13)); p.push_back(fmadd_d(14, 0, 1, 14));
    p.push_back(fsd(15, 15, 0)); p.push_back(fsd(12, 15, 8)); p.push_back(fsd(13, 15, 16)); p.push_back(fsd(14, 15, 24));
    p.push_back(addi(14, 14, 4));
    p.push_back(addi(15, 15, 32));
    p.push_back(bltu(14, 11, -4 * (p.size() - l_loop)));
    p.push_back(fence());
    p.push_back(sw(0, 20, 12'h7C0));     // disable streams
    if (use_dma) begin
      li(p, 19, DONE);
      p.push_back(slli(17, 6, 2)); p.push_back(add(17, 17, 18));
      p.push_back(sw(19, 17, 64));         // done flag of this core
      p.push_back(bne(6, 0, 4 * 32));      // others: to the ecall far below (patched)
      l_done = p.size() - 1;
      for (int c = 1; c < ncores; c++) begin
        p.push_back(lw(17, 18, 64 + 4 * c));
        p.push_back(bne(17, 19, -4));
      end
      li(p, 20, PERIPH_BASE);
      li(p, 21, y_addr(n));               p.push_back(sw(21, 20, 8'h00)); p.push_back(sw(0, 20, 8'h04));
      // destination: y_out + cluster index * 512
      p.push_back(csrr(22, 12'hF14));
      p.push_back(i_type(-8, 22, 7, 22, 7'b0010011));  // andi x22, x22, -8
      p.push_back(slli(22, 22, 6));
      li(p, 21, y_out);                   p.push_back(add(21, 21, 22));
      p.push_back(sw(21, 20, 8'h08));     p.push_back(sw(0, 20, 8'h0C));
      li(p, 21, 32'(out_bytes(n)));       p.push_back(sw(21, 20, 8'h10));
      p.push_back(sw(21, 20, 8'h14));
      p.push_back(lw(22, 20, 8'h18));
      p.push_back(bne(22, 0, -4));
      p[l_done] = bne(6, 0, 4 * (p.size() - l_done));
    end
    p.push_back(ecall());
    return p;
  endfunction
endpackage
