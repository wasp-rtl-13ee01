// gpu_core_model: behavioural model of one fragment core, its L0 data cache
// with MSHRs and a fixed-latency memory, for testbenches only (not
// synthesizable).
//
// It accepts warps from a WaSP scheduler and reports back what the scheduler
// needs: the number of free MSHRs and, per cycle, how many priority warps
// blocked, woke up or finished, and how many warps of any kind finished.
//
// Each warp spends PIPE_LAT cycles in the front end, then makes ACCESSES
// texture accesses through a single load/store port (one access per cycle).
// Access k of the quad at (qx, qy) touches memory block
// (k, qx / BLK_QUADS, qy / BLK_QUADS): neighbouring quads share blocks, as
// texels of nearby pixels do. A hit costs nothing more; a miss takes a free
// MSHR for MEM_LAT cycles; a miss to a block already being fetched (secondary
// miss) waits on that MSHR. Warps waiting on an MSHR are blocked. When no
// MSHR is free, a primary miss cannot be accepted and the load/store port
// stalls (a cache stall), holding up hits behind it too. Filled blocks stay
// in the cache for the rest of the run. After its last access a warp computes
// for COMPUTE_LAT cycles and finishes.
module gpu_core_model
  import wasp_pkg::*;
#(
  parameter int SLOTS       = 64,
  parameter int MSHRS       = 16,
  parameter int MSHR_W      = 5,
  parameter int CNT_W       = 7,
  parameter int PIPE_LAT    = 8,
  parameter int MEM_LAT     = 60,
  parameter int COMPUTE_LAT = 16,
  parameter int ACCESSES    = 2,
  parameter int BLK_QUADS   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              launch_valid,
  output logic              launch_ready,
  input  launch_t           launch_data,
  output logic [MSHR_W-1:0] free_mshrs,
  output logic [CNT_W-1:0]  pri_block_cnt,
  output logic [CNT_W-1:0]  pri_unblock_cnt,
  output logic [CNT_W-1:0]  pri_retire_cnt,
  output logic [CNT_W-1:0]  retire_cnt
);
  typedef enum logic [2:0] {S_FREE, S_PIPE, S_LDST, S_WAIT, S_COMP} st_e;

  st_e     st     [SLOTS];
  int      timer  [SLOTS];
  bit      is_pri [SLOTS];
  int      acc    [SLOTS];
  int      wmshr  [SLOTS];
  int      qx     [SLOTS];
  int      qy     [SLOTS];
  int      t_launch [SLOTS];
  bit      m_valid [MSHRS];
  int      m_block [MSHRS];
  int      m_timer [MSHRS];
  bit      present [int];
  bit      ready_rand;
  int      cycle;

  // statistics, read hierarchically by testbenches
  int n_launched, n_retired, n_pri_launched;
  int n_hits, n_primary, n_secondary, n_stall_cycles;
  longint lat_sum_pri, lat_sum_reg;
  int max_blocked_pri;

  function automatic int block_of(int k, int x, int y);
    return (k << 24) | ((x / BLK_QUADS) << 12) | (y / BLK_QUADS);
  endfunction

  function automatic int used_mshrs();
    int u = 0;
    for (int m = 0; m < MSHRS; m++) if (m_valid[m]) u++;
    return u;
  endfunction

  assign launch_ready = ready_rand;

  always @(posedge clk) begin
    int nb, nu, npr, nr, slot, m, b, fm;
    bit served;
    nb = 0; nu = 0; npr = 0; nr = 0;
    if (!rst_n) begin
      for (int s = 0; s < SLOTS; s++) begin
        st[s] = S_FREE; timer[s] = 0; is_pri[s] = 0; acc[s] = 0; wmshr[s] = 0;
        qx[s] = 0; qy[s] = 0; t_launch[s] = 0;
      end
      for (int k = 0; k < MSHRS; k++) begin
        m_valid[k] = 0; m_block[k] = 0; m_timer[k] = 0;
      end
      present.delete();
      n_launched = 0; n_retired = 0; n_pri_launched = 0; n_hits = 0; n_primary = 0;
      n_secondary = 0; n_stall_cycles = 0; lat_sum_pri = 0; lat_sum_reg = 0;
      max_blocked_pri = 0; cycle = 0;
      free_mshrs <= MSHR_W'(MSHRS);
      pri_block_cnt <= '0; pri_unblock_cnt <= '0; pri_retire_cnt <= '0; retire_cnt <= '0;
      ready_rand <= 1'b1;
    end else begin
      cycle++;
      // memory fills: wake every warp waiting on the MSHR
      for (int k = 0; k < MSHRS; k++) begin
        if (m_valid[k]) begin
          if (m_timer[k] <= 1) begin
            m_valid[k] = 0;
            present[m_block[k]] = 1;
            for (int s = 0; s < SLOTS; s++) begin
              if (st[s] == S_WAIT && wmshr[s] == k) begin
                if (is_pri[s]) nu++;
                if (acc[s] >= ACCESSES) begin st[s] = S_COMP; timer[s] = COMPUTE_LAT; end
                else st[s] = S_LDST;
              end
            end
          end else m_timer[k] = m_timer[k] - 1;
        end
      end
      // compute and front-end timers
      for (int s = 0; s < SLOTS; s++) begin
        if (st[s] == S_COMP) begin
          if (timer[s] <= 1) begin
            st[s] = S_FREE; nr++; n_retired++;
            if (is_pri[s]) begin npr++; lat_sum_pri += (longint'(cycle) - longint'(t_launch[s])); end
            else lat_sum_reg += (longint'(cycle) - longint'(t_launch[s]));
          end else timer[s] = timer[s] - 1;
        end else if (st[s] == S_PIPE) begin
          if (timer[s] <= 1) st[s] = S_LDST; else timer[s] = timer[s] - 1;
        end
      end
      // load/store port: serve the oldest warp that waits for it
      slot = -1;
      for (int s = 0; s < SLOTS; s++)
        if (st[s] == S_LDST && (slot < 0 || t_launch[s] < t_launch[slot])) slot = s;
      if (slot >= 0) begin
        b = block_of(acc[slot], qx[slot], qy[slot]);
        served = 0;
        if (present.exists(b)) begin
          n_hits++; served = 1;
          acc[slot] = acc[slot] + 1;
          if (acc[slot] >= ACCESSES) begin st[slot] = S_COMP; timer[slot] = COMPUTE_LAT; end
        end else begin
          m = -1;
          for (int k = 0; k < MSHRS; k++) if (m_valid[k] && m_block[k] == b) m = k;
          if (m >= 0) n_secondary++;
          else begin
            for (int k = MSHRS - 1; k >= 0; k--) if (!m_valid[k]) m = k;
            if (m >= 0) begin
              m_valid[m] = 1; m_block[m] = b; m_timer[m] = MEM_LAT; n_primary++;
            end
          end
          if (m >= 0) begin
            acc[slot] = acc[slot] + 1;
            st[slot] = S_WAIT; wmshr[slot] = m;
            if (is_pri[slot]) nb++;
          end else n_stall_cycles++;
        end
      end
      // launch
      if (launch_valid && launch_ready) begin
        slot = -1;
        for (int s = SLOTS - 1; s >= 0; s--) if (st[s] == S_FREE) slot = s;
        assert (slot >= 0) else $error("gpu_core_model: warp launched with no free slot");
        if (slot >= 0) begin
          st[slot] = S_PIPE; timer[slot] = PIPE_LAT; acc[slot] = 0;
          is_pri[slot] = launch_data.is_priority;
          qx[slot] = int'(launch_data.quad.qx); qy[slot] = int'(launch_data.quad.qy);
          t_launch[slot] = cycle;
          n_launched++;
          if (launch_data.is_priority) n_pri_launched++;
        end
      end
      fm = MSHRS - used_mshrs();
      free_mshrs      <= MSHR_W'(fm);
      pri_block_cnt   <= CNT_W'(nb);
      pri_unblock_cnt <= CNT_W'(nu);
      pri_retire_cnt  <= CNT_W'(npr);
      retire_cnt      <= CNT_W'(nr);
      ready_rand      <= ($urandom_range(0, 9) != 0);
    end
  end
endmodule
