00003537
000205b7
40058593
0000f7b7
80078793
00200f93
c00022f3
00052383
c0002373
40530e33
01c7a023
c00022f3
00752223
c0002373
40530e33
01c7a223
c00022f3
0005a383
c0002373
40530e33
01c7a423
c00022f3
0475a023
c0002373
40530e33
01c7a623
10058593
ffff8f93
fa0f94e3
00003637
10060613
112232b7
34428293
00562023
0000b2b7
abb28293
00561223
0cc00293
005603a3
00164303
0067a823
00461303
0067aa23
00760303
0067ac23
0000f737
00072a23
00072223
05d00293
00572023
01472283
fe028ee3
0000006f
