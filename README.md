# GeneSys in SystemVerilog

GeneSys is a chip that lets a system keep learning by evolving its neural
networks in hardware instead of training them with back-propagation. It runs
NEAT (NeuroEvolution of Augmenting Topologies). A population of small networks
is scored in an environment. The fittest become parents. Their children are
built by crossover and mutation. The chip has two engines for this:

- **EvE** (evolution engine) builds children. An array of 256 processing
  elements (PEs) works gene by gene, which the paper calls gene-level
  parallelism. Each PE is a four-stage pipeline: crossover, perturbation,
  delete and add.
- **ADAM** (inference engine) runs the networks. It is a 32×32 systolic
  multiply-accumulate array that evaluates many networks back to back, which
  the paper calls population-level parallelism.

Both engines share a 1.5 MB on-chip genome buffer. A small CPU (a Cortex-M0
in the paper) computes fitness, selects parents and packs genomes into
matrices. That CPU is not part of this RTL. Its side of the chip appears as
top-level ports.

## Blocks (`rtl/`)

| File | What it is |
|---|---|
| `genesys_pkg.sv` | Shared types: the 64-bit gene, genome header, aligned gene pair, pipeline token, EvE configuration |
| `xorwow.sv` | One XOR-WOW random-number core, one 32-bit word per cycle |
| `eve_prng.sv` | Gives each PE 12 fresh random bytes per cycle, from 3 xorwow cores per PE |
| `eve_crossover.sv` | PE stage 1: takes each attribute from parent A or B by comparing a random byte with the bias |
| `eve_perturb.sv` | PE stage 2: with the perturbation probability, adds random deltas to the gene's values and redraws its codes |
| `eve_delete.sv` | PE stage 3: deletes nodes (up to a threshold; inputs and outputs are protected), remembers their IDs, and drops connections that touch them or lose their own draw |
| `eve_add.sv` | PE stage 4: add-node splits a connection into node + 2 connections; add-connection joins a stored source with a later destination |
| `eve_pe.sv` | The four stages chained with valid/ready handshakes; exports per-cycle event flags |
| `gene_align.sv` | Per-PE buffer for two parent genomes; puts the fitter parent first and streams key-aligned gene pairs |
| `eve_gene_split.sv` | Child list, greedy PE allocation in waves, and one reader per SRAM bank. Each needed parent is read **once** per wave and multicast to every PE that needs it |
| `child_merge.sv` | Per-PE collector. Inherited genes arrive in key order; added genes wait in a 16-entry sorted side buffer; both are merged on the way out |
| `eve_gene_merge.sv` | One writer per SRAM bank writes each finished child (header + sorted genes) back to its slot |
| `genome_buffer.sv` | 48 banks × 4096 × 64 bit = 1.5 MB, one port per bank, 1-cycle read |
| `eve.sv` | EvE: split, PRNG, 256 PEs, merge, and the wave sequencer (load → run → write per wave) |
| `adam_mac.sv`, `adam.sv` | Weight-stationary 32×32 systolic array: one input vector per cycle, result after 64 cycles |
| `genesys_top.sv` | The chip: EvE, ADAM, the genome buffer, and the host (CPU) port |

## Data layout

- **Gene.** A gene is one 64-bit word:
  `{is_conn, key_a[11:0], key_b[11:0], attr0[15:0], attr1[15:0], attr2[3:0], attr3[2:0]}`.
  - For a node gene, the attributes are bias, response, activation and aggregation.
  - For a connection gene, they are weight (attr0) and enable (attr3[0]).
  - Values are Q8.8 fixed point.
- **Genome slot.** Genome *g* lives in bank *g* mod 48, at word (*g* div 48)·512.
  - Word 0 is the header `{fitness[31:0], num_genes[15:0], 16'b0}`.
  - Up to 511 genes follow, sorted by `{is_conn, key_a, key_b}`, so all nodes come first, then all connections.
  - 48 banks × 8 slots = 384 genomes, which covers 150 parents + 150 children.
- **Where the numbers come from.**
  - From the paper: the 64-bit gene, 48 banks, 1.5 MB, 256 PEs and the 32×32 array.
  - This design's choices: the bit layout, the slot size and the number format.

## One generation

1. **Load parents.** With EvE idle, the CPU writes genomes through the host port (`host_*`).
2. **Run inference.** The CPU packs a genome into a weight matrix. It loads it into ADAM one row per cycle, then streams observation vectors.
3. **Select parents.** The CPU writes fitness into the headers. It then writes a list of children (parent A, parent B, child slot) and starts EvE.
4. **Build children in waves.** For each wave of up to 256 children:
   - Every needed parent is read once and broadcast on its bank's lane. Each PE captures its two parents.
   - The PEs stream aligned gene pairs through the pipeline.
   - Each child is written back in sorted order.
   - While EvE runs, `host_ready` is low and the host port is refused.
5. **Read statistics.** `event_count` counts perturbations, node and connection deletions, node and connection additions, and add-stage stalls. `sram_reads`, `sram_writes` and `phase_cycles` show the cost of the multicast and of each phase.

## Testbenches (`tb/`)

Every testbench checks itself and prints
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| Testbench | Covers |
|---|---|
| `tb_xorwow`, `tb_eve_prng` | Random numbers, checked against a software xorwow model |
| `tb_eve_pe_stages` | Each of the four PE stages, against a model with known random bytes |
| `tb_eve_pe` | The full PE pipeline, including its 4-cycle latency and back-pressure |
| `tb_gene_align`, `tb_child_merge` | Alignment and merge, with random genomes |
| `tb_genome_buffer` | Bank isolation and read latency |
| `tb_adam` | Matrix-vector results and the 64-cycle latency, with back-to-back vectors |
| `tb_eve` | A small EvE (8 PEs, 4 banks, 12 children in 2 waves). Children are checked exactly with mutation disabled. With mutation on, structural checks run and every event type must occur |
| `tb_genesys_top` | The whole chip at its default size (256 PEs, 48 banks, 32×32 ADAM) for one generation of 150 children |

### What `tb_genesys_top` covers

- Host writes and reads of the genome buffer.
- ADAM inference on genomes packed into weight matrices, checked against the genes.
- Parent selection and a complete EvE generation.
- Checks on every child: sorted genes, a correct header, no dangling connections, and inputs and output kept.

It also counts each mechanism. A mechanism that never happens counts as a failure. The mechanisms are:

- perturbation
- node deletion and connection deletion
- node addition and connection addition
- add-stage stall
- multicast reuse of parents (fewer SRAM reads than reading two parents per child)
- host refused while EvE runs
- back-to-back ADAM vectors

## Limits and choices

- The CPU, its software (gene selector, vectorize routine, fitness) and the
  DRAM behind the genome buffer are not built. The testbench plays the CPU.
- The paper does not give the bit-level insides of several blocks. These are
  this design's own choices:
  - the mutation value rules
  - the sizes of the deletion store and the side buffer
  - the valid/ready handshakes
  - the bus arbitration
  - the ADAM number formats
- The three phases of a wave (load, run, write) do not overlap, so a wave
  costs load + run + write cycles.
- The genome buffer is written as a plain array. A real chip would use SRAM macros.

## Simulating

Any testbench builds with plain Verilator 5, with `rtl/` on the search path. For example:

    verilator --binary --timing -Irtl -y rtl rtl/genesys_pkg.sv tb/tb_genesys_top.sv --top-module tb_genesys_top
    obj_dir/Vtb_genesys_top

At the default size, `tb_genesys_top` takes several minutes to build, because it
has 256 PEs and a 1.5 MB memory array. It runs in a few seconds. One generation
of 150 children takes about 470 cycles:

- about 60 cycles to load parents
- about 40 cycles to run the PEs
- about 360 cycles to write the children back

Multicast cut SRAM reads from about 4600 to about 460.
