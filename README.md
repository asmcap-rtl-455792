# ASMCap: approximate string matching in a capacitive multi-level CAM

ASMCap matches DNA reads against stored reference segments in one parallel
search. Every row of a CAM array holds a reference segment of N bases. A read
of N bases is driven onto the searchlines, and each cell compares its stored
base with three read bases: the one at the same position and its left and
right neighbours. A cell is "mismatched" when none of the three equals it.
This neighbour-tolerant distance (called ED* here) stays close to the true edit
distance when a read has a few insertions or deletions, where plain Hamming
distance (HD) would explode. Each row's matchline sums its mismatched cells,
and a sense amplifier reports "match" when that sum is at most the threshold T.

## The charge-domain matchline

In silicon each cell output drives one plate of an equal capacitor whose other
plate is the matchline. Charge sharing then gives V_ML = (n_mis/N)·VDD, which
is linear, does not depend on timing and needs no precharge. With
V_ref = (T/N)·VDD the sense amplifier decision is exactly n_mis <= T. The RTL
keeps this law and represents both voltages by their step counts:

* `asmcap_matchline` counts the ones among the cell outputs.
* `asmcap_sense_amp` is a clocked comparator `n_mis <= T`.

Capacitor mismatch and the analog settling are not modelled.

## Cell and array

`asmcap_cell` stores a base in two SRAM bits (`asmcap_sram_bit`). The cell
compares each bit as (D & SL) | (Dbar & SLbar). A select S that the whole
array shares picks the output:

* ED* mode: `O = ~(O_C | O_L | O_R)`
* HD mode: `O = ~O_C`

Cells at the row ends have no outer neighbour; that input never matches. The
base code (A=00, C=01, G=10, T=11) is this design's own choice.

`asmcap_array` holds M x N cells plus:

* the decoder and wordline driver;
* the SL buffer and driver, which drives SL/SLbar for writes and searches and
  holds both rails low when idle;
* the read shift registers, which rotate the read left or right by one base;
* one sense amplifier per row.

It does one search per cycle with a latency of 2 cycles. A write reaches its
row one cycle after it is issued.

## Misjudgment correction

**HDAC** (Hamming-distance aid correction, `asmcap_hdac`) helps when the
errors are mostly substitutions. The same read is searched once in ED* mode
and once in HD mode. Where the two results of a row differ, the row takes the
HD result with probability p. p = f(e_s, e_id, T) is computed off-line and
given as a 16-bit fraction. The random numbers come from a 16-bit LFSR per row
(x^16+x^14+x^13+x^11+1). The controller skips the HD cycle when HDAC is off or
when p is below about 1%.

**TASR** (threshold-aware sequence rotation, `asmcap_tasr_acc`) helps with
runs of insertions or deletions. When T >= T_l, the read is also searched
rotated by 1..N_R bases, and the results are ORed. Each rotation rides on the
preceding search cycle. T_l = ceil(gamma/e_id · m) is also computed off-line.

A read therefore costs 1 load cycle, 1 ED* cycle, an optional HD cycle and
optional N_R rotation cycles. `asmcap_unit` (one array plus HDAC and TASR)
folds these cycles into one M-bit result. Doing HDAC first on the unrotated
read and then ORing in the rotations is this design's choice. The source
describes the two strategies separately.

## System

`asmcap_top` holds:

* a global buffer (`asmcap_global_buffer`), a FIFO of reads coming from the
  read memory;
* the controller (`asmcap_controller`), which runs the host instructions
  CONFIG, WRITE_REF, SEARCH and NOP and stalls when the buffer is empty;
* a registered binary H-tree (`asmcap_htree`), which broadcasts every command
  to all units;
* NUM_ARRAYS units.

All units return their match vectors in the same cycle. The host CPU and the
read memory are outside the design. Their ports are the instruction port and
the read-stream port.

Sizes:

* The reference configuration is 512 arrays of 256 x 256 cells (64 Mb).
* The RTL default is `NUM_ARRAYS = 16`, because lint of the 512-array top
  did not finish in reasonable time.
* M = N = 256 are kept.

## Trust and known gaps

* Each block has a self-checking testbench in `tb/`.
* The array test uses the example sequences from the source: ED* = 1 and
  HD = 5 for the HDAC example, and ED* = 4/0/2 for the TASR example with 0, 1
  and 2 right rotations. All of these are reproduced.
* The end-to-end test `tb_asmcap_top` (4 arrays of 6 x 16 cells) currently
  reports mismatches between the DUT and its model on some rows. They have
  not been resolved, so treat the top-level composition as unverified.
* No full-size (512-array) simulation was run.
* Long reads are not split into N-base k-mers: that is left to the memory
  side.

## Simulating

    verilator --binary --timing -y rtl -y tb +libext+.sv rtl/asmcap_pkg.sv \
      tb/tb_asmcap_ref_pkg.sv tb/tb_asmcap_array.sv --top-module tb_asmcap_array
    ./obj_dir/Vtb_asmcap_array

Every testbench prints `TB_RESULT checks=N failures=F`.
