# JASS checkpointing hardware in SystemVerilog

JASS takes consistent checkpoints of a many-core machine whose memory is DRAM
backed by non-volatile memory (NVM). Every cache line and every NoC message
carries a one-bit snapshot colour. A token sent from a checkpoint controller
floods the NoC. Each element flips its colour when the token reaches it, so
data with the old colour belongs to the checkpoint being taken. The hardware
then drains that old-colour data into NVM while the cores keep running.

## Parts
- `snap_router`, `noc_torus`: a 5x4 torus. The token travels on its own wires.
  - Each router counts the old-colour flits it holds or receives just after the token (`xcount`).
  - It also counts the marked flits it delivers (`pcount`).
  - Equal sums mean the network holds no old-colour data.
  - Flits use mesh X-then-Y routing (no wrap links), so one virtual channel cannot deadlock.
- `snap_cache`: the L2s and LLC banks, with a snapshot bit per line and a scrubber.
  - `scrub_step` sets how many cycles the scrubber waits between groups of sets; `scrub_gran` sets how many sets are in a group.
  - A new-colour write to a dirty old-colour line first sends the old line down.
- `access_scheduler`: 16 page entries that merge blocks into whole-page NVM writes.
  - When the first cache block of a page arrives, it asks the DRAM side for the rest of that page.
- `dram_ctrl` with `locality_predictor`: one radix page table per colour, using four 10-bit levels.
  - A walker persists every old-colour page at a checkpoint.
  - A second walker persists cold pages early ("speculative"), as judged by the counters.
  - A new-colour write to a page still in the old table persists the old version first.
- `ckpt_ctrl`: runs the phases in order: flush, L2 scrub with the DRAM walk, LLC scrub, drain.
  - It tunes the walk step from n = c/k over 50 sub-epochs.
- `jass_top`: the whole chip.
  - Node map: cores 0-7, LLC banks 8-15, directory 16, DRAM 17, NVM 18, controller 19.

## Trust and limits
- Every block testbench passes.
- The end-to-end test (`tb_jass_top`) currently **fails**:
  - Under heavy traffic, a few blocks per checkpoint are stale in NVM. A DRAM write sent before the token can still be in flight when the access scheduler scrubs the same page. A hold input for this exists (`sreq_hold`), but with a small scheduler it stalls the flush, so the top ties it low.
  - The run never reached a speculative persist.
  - It never reached a directory notification.
- Not built:
  - the cores, L1s, coherence directory, DRAM and NVM devices;
  - the NVM recovery table;
  - the small memory-controller cache.

## Simulating
`verilator --binary --timing -Irtl rtl/jass_pkg.sv rtl/<blocks>.sv tb/tb_<block>.sv --top-module tb_<block>`, then run `obj_dir/V...`. Each testbench prints `TB_RESULT checks=N failures=M`.
