// fase_hfutex_mask: HFutex Mask Cache of every core (hardware-assisted futex).
//
// Each core has a small cache of futex addresses for which the host found,
// during a previous futex wake, that no thread was waiting. When the Next state
// machine sees a futex-wake system call whose address hits the mask of the
// calling core, it completes the call inside the controller (return value 0)
// instead of sending it to the host. The host fills and empties the masks with
// HFutex requests: set an address on a core, clear an address on a core (after
// a futex wait on it succeeded) and clear a whole core (on a thread switch).
//
// The paper gives the function and the three host operations; the organisation
// is this design's: ENTRIES fully associative entries per core (default 4, the
// paper says only "small"), each a valid bit and the 64-bit address as the
// core saw it in register a0 (virtual address). Setting an address already
// present does nothing; otherwise the first free entry is used, or, when the
// core's mask is full, a round-robin victim.
//
// Interface: one update per cycle (op, cpu, addr), registered; the lookup
// (lk_cpu, lk_addr -> lk_hit) is combinational and sees updates the cycle after.
module fase_hfutex_mask #(
  parameter int unsigned N_CPU   = 4,
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned AW      = 64,
  parameter int unsigned IDW     = (N_CPU > 1) ? $clog2(N_CPU) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           set_valid,
  input  logic           clr_valid,
  input  logic           clrall_valid,
  input  logic [IDW-1:0] upd_cpu,
  input  logic [AW-1:0]  upd_addr,
  input  logic [IDW-1:0] lk_cpu,
  input  logic [AW-1:0]  lk_addr,
  output logic           lk_hit
);
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [N_CPU-1:0][ENTRIES-1:0]         vld;
  logic [AW-1:0]                         addr [N_CPU][ENTRIES];
  logic [N_CPU-1:0][EW-1:0]              victim;

  always_comb begin
    lk_hit = 1'b0;
    for (int e = 0; e < ENTRIES; e++)
      if (vld[lk_cpu][e] && addr[lk_cpu][e] == lk_addr) lk_hit = 1'b1;
  end

  // update-side lookup
  logic          upd_hit, upd_free;
  logic [EW-1:0] hit_e, free_e;
  always_comb begin
    upd_hit  = 1'b0;
    upd_free = 1'b0;
    hit_e    = '0;
    free_e   = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (vld[upd_cpu][e] && addr[upd_cpu][e] == upd_addr) begin
        upd_hit = 1'b1;
        hit_e   = EW'(e);
      end
      if (!vld[upd_cpu][e]) begin
        upd_free = 1'b1;
        free_e   = EW'(e);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (set_valid && !upd_hit)
      addr[upd_cpu][upd_free ? free_e : victim[upd_cpu]] <= upd_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      victim <= '0;
    end else if (clrall_valid) begin
      vld[upd_cpu] <= '0;
    end else if (clr_valid) begin
      if (upd_hit) vld[upd_cpu][hit_e] <= 1'b0;
    end else if (set_valid && !upd_hit) begin
      if (upd_free) vld[upd_cpu][free_e] <= 1'b1;
      else begin
        vld[upd_cpu][victim[upd_cpu]] <= 1'b1;
        victim[upd_cpu] <= (victim[upd_cpu] == EW'(ENTRIES - 1)) ? '0 : victim[upd_cpu] + 1'b1;
      end
    end
  end
endmodule
