00008137
04c000ef
008000ef
0000006f
0000f737
00072a23
0000f637
00a62223
0000f6b7
0006a423
0000f7b7
0007a623
05d00693
01470713
00d7a023
00072783
fe078ee3
0000f7b7
0107a703
0000006f
000107b7
00010737
00072f03
0047a683
06200713
13000793
80001637
00178793
00e60023
0007c703
fe071ae3
0ad05663
000047b7
00278793
00f686b3
000108b7
ffffeeb7
00010837
ffff0f93
00269e13
00888893
00000513
ff8e8e93
10080813
fff00293
0008a583
01d88333
07e05063
000f8613
00000693
00c687b3
4017d793
00279713
01070733
00072703
02e58663
00b75e63
00178693
fed650e3
00532023
00488893
fd1e10e3
00008067
fff78613
fcd654e3
fe9ff06f
fff7c713
01f75713
00f32023
00e50533
fd9ff06f
fff00793
00f32023
fcdff06f
00000513
00008067
736e6962
63726165
00000a68
