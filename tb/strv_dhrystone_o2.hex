00008137
12977111
82930000
3317d2e2
03130000
f6635323
a0230062
02910002
2869bfdd
6705a001
d3472503
800007b7
0ff00693
0505c3d4
d2a72a23
800007b7
8082c388
87aa8082
0005c703
05850785
fee78fa3
8082fb75
00054783
a025e791
00054783
85b6cf81
0005c703
86930505
07e30015
8533fef7
808240e7
0015c703
40e78533
c7038082
b7f50005
962aca19
c70387aa
07850005
8fa30585
1ae3fee7
8082fef6
0ff5f593
00c50733
c61187aa
8fa30785
1de3feb7
8082fef7
45811141
c6064501
678524e5
d5c7a783
6ea16f21
f0ff2023
a7836785
6e21d587
a2236321
6785f0fe
d557c783
682168a1
f0fe2423
c7836785
6521d547
26236685
6785f0f3
d887a783
af8365a1
a823d606
6785f0f8
48c7a703
a7836785
2a23d647
6621f0e8
62a143d8
f0e52c23
ae234798
47d4f0e5
20236721
a683f2d6
0613004f
2223fbc0
a383f2d7
66a1008f
f272a423
00cfaf83
f3f6a623
0107c683
6705c29d
061307c1
07130440
a0318247
0007c683
00074603
0785ca85
89e30705
8633fec6
67a140c6
a8236699
6721f2c7
2a2306b5
07b7f2d7
07138000
c3980ff0
40b29002
80820141
40c00633
0509bfe9
c20c95aa
07138082
08130056
08330c80
060a0307
00271793
c114953e
c154dd38
00c807b3
4b9497ae
cf98cbd8
00168713
4118cb98
95b295c2
97ae6785
fae7aa23
47156785
d4e7ae23
75138082
f5930ff5
04630ff5
450100b5
67858082
d4a78aa3
80824505
c4221141
c606c226
84ae842a
0034c583
00244503
f97d3fc9
852285a6
47813d05
00a05763
47296785
d4e7ae23
40b24785
44924422
0141853e
15798082
00153513
11418082
c226c422
842ac606
37f584ae
c111478d
c09c87a2
0c634789
e16302f4
c8010287
a7036785
0793d5c7
d9630640
40b202e7
a0234422
44920004
80820141
13634711
c09c00e4
442240b2
01414492
40b28082
47854422
4492c09c
80820141
442240b2
c09c478d
01414492
11018082
c432c22e
c83ac636
cc42ca3e
6105ce46
67858082
d557c703
04100793
00f70363
411c8082
27036705
07a5d5c7
c11c8f99
67858082
d647a603
4218c609
a603c118
6785d647
d5c7a583
45290631
1141bd79
c04ac422
69054100
d6492583
0613c226
84aa0300
c6068522
409833a5
c4dc4795
c018c45c
3f758522
e78d405c
47994488
0593c45c
37310084
d6492783
06134448
439c00c4
449240b2
4422c01c
45a94902
b5a10141
408c4422
490240b2
44928526
03000613
bb290141
c7836785
6705d557
d5872683
fbf78793
0017b793
2c238fd5
6785d4f7
04200713
d4e78a23
67858082
04100713
d4e78aa3
ac236785
8082d407
cf067135
cb26cd22
c74ec94a
c356c552
dedec15a
dae6dce2
d6eed8ea
71391100
00f10713
07937139
9bc100f1
66859b41
a023c398
4709d6e6
6585c798
02800713
c7d86685
01078513
0007a223
82458593
d6f6a223
65853199
84858593
f8040513
6785392d
85136705
07138687
47a9e307
64f72e23
65853d69
85936505
051386c5
357187c5
a7836785
8163d507
65053e07
8a050513
46373dad
6585000f
06136505
85932406
05138fc5
35959085
85136785
3db18687
a6236785
0793d407
26231f40
6485f6f4
6a856a05
f6c42983
05136705
85ce91c7
45053d2d
364536c1
24236705
5863d4a7
8c930f30
49050019
4b9d4c05
04000b13
3dc93ded
85936785
05139407
3e61fa04
fa040593
f8040513
f7842e23
37933b81
67050015
f7840613
4509458d
d4f72c23
f7742c23
268339c9
6785f784
e3078593
460d6785
d6878513
2a23478d
31c1f6f4
a5036785
3d11d647
d544c783
2efb7e63
04100d13
a809498d
d544c703
001d0793
0ff7fd13
03a76e63
04300593
39d1856a
f7c42703
fee512e3
f7c40593
33054501
960a8593
fa040513
c7033639
0793d544
2e23001d
fd13d52a
89ca0ff7
fda776e3
00199793
2d0399be
0513f784
0905f744
03a9cdb3
f7b42a23
9be3339d
89b3f32c
971341a9
07330039
09334137
346541b7
670587aa
89ba4501
d4f72223
67053c65
d4872703
d449a783
67058f99
d4f72023
24f05e63
67054785
d4f72623
05136505
33219805
05136d05
3301868d
d5ca2583
05136505
69859b85
851339cd
45959d49
678531ed
d587a583
05136505
39f19f05
9d498513
39d14585
c5836785
6505d557
a0c50513
6a0531d9
a28a0513
04100593
c583396d
6505d544
a4450513
0513317d
0593a28a
31550420
87936785
538cd687
05136505
3951a605
9d498513
3171459d
87936785
a583e307
650565c7
a7c50513
650539ad
a9850513
6505398d
ac450513
648531ad
d644a783
05136c05
438cad0c
6b056b85
65053999
aec50513
a78331b9
8513d644
6a85b20b
6a0543cc
39356c85
9d498513
39154581
d644a783
b3cb0513
3125478c
9d498513
31054589
d644a783
b58a8513
391147cc
9d498513
313145c5
d644a583
b74a0513
05c16485
85133efd
3ee5b904
05136505
3ec5bc85
d60ca783
ad0c0513
36d5438c
05136505
3ef1bdc5
d60ca783
b20b8513
3ec143cc
9d498513
36e14581
d60ca783
b3cb0513
3e75478c
9d498513
3e554585
d60ca783
b58a8513
366547cc
9d498513
364545c9
d60ca583
b74a0513
3e5105c1
b9048513
25833679
6505f744
c1c50513
85133649
45959d49
65053ead
051385ca
3e85c385
9d498513
36a545b5
f7842583
05136505
3eb1c545
9d498513
3e91459d
f7c42583
05136505
36a1c705
9d498513
36814585
05936505
0513f804
3e15c8c5
05136505
3635ca85
05936505
0513fa04
3605ce05
05136505
3e21cfc5
868d0513
26033e09
47b7f6c4
8793000f
07332407
678502f6
d407a683
c7b34501
473302c6
668502d7
d2f6ae23
ac236785
0113d2e7
40faf604
44da446a
49ba494a
4a9a4a2a
5bf64b0a
5cd65c66
5db65d46
8082610d
bbb149a5
f6c42683
a7036785
9793d4c7
97b60026
26230786
01e3f6f4
bb59c607
05136505
f0ef8cc5
b105a9df
59524844
4e4f5453
52502045
4152474f
53202c4d
20454d4f
49525453
0000474e
00000000
59524844
4e4f5453
52502045
4152474f
31202c4d
20545327
49525453
0000474e
0000000a
56202c43
69737265
32206e6f
0000322e
79726844
6e6f7473
65422065
6d68636e
2c6b7261
72655620
6e6f6973
0a732520
00000000
676f7250
206d6172
706d6f63
64656c69
74697720
72272068
73696765
27726574
74746120
75626972
000a6574
676f7250
206d6172
706d6f63
64656c69
74697720
74756f68
65722720
74736967
20277265
72747461
74756269
00000a65
79636472
28656c63
00000029
6e697355
73252067
5a48202c
0a64253d
00000000
69797254
2520676e
75722064
7420736e
756f7268
44206867
73797268
656e6f74
00000a3a
59524844
4e4f5453
52502045
4152474f
32202c4d
20444e27
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
33202c4d
20445227
49525453
0000474e
616e6946
6176206c
7365756c
20666f20
20656874
69726176
656c6261
73752073
69206465
6874206e
65622065
6d68636e
3a6b7261
0000000a
5f746e49
626f6c47
2020203a
20202020
20202020
0a642520
00000000
20202020
20202020
756f6873
6220646c
20203a65
0a642520
00000000
6c6f6f42
6f6c475f
20203a62
20202020
20202020
0a642520
00000000
315f6843
6f6c475f
20203a62
20202020
20202020
0a632520
00000000
20202020
20202020
756f6873
6220646c
20203a65
0a632520
00000000
325f6843
6f6c475f
20203a62
20202020
20202020
0a632520
00000000
5f727241
6c475f31
385b626f
20203a5d
20202020
0a642520
00000000
5f727241
6c475f32
385b626f
5d375b5d
2020203a
0a642520
00000000
20202020
20202020
756f6873
6220646c
20203a65
6d754e20
5f726562
525f664f
20736e75
3031202b
0000000a
5f727450
626f6c47
000a3e2d
74502020
6f435f72
203a706d
20202020
20202020
0a642520
00000000
20202020
20202020
756f6873
6220646c
20203a65
6d692820
6d656c70
61746e65
6e6f6974
7065642d
65646e65
0a29746e
00000000
69442020
3a726373
20202020
20202020
20202020
0a642520
00000000
6e452020
435f6d75
3a706d6f
20202020
20202020
0a642520
00000000
6e492020
6f435f74
203a706d
20202020
20202020
0a642520
00000000
74532020
6f435f72
203a706d
20202020
20202020
0a732520
00000000
20202020
20202020
756f6873
6220646c
20203a65
52484420
4f545359
5020454e
52474f52
202c4d41
454d4f53
52545320
0a474e49
00000000
7478654e
7274505f
6f6c475f
0a3e2d62
00000000
20202020
20202020
756f6873
6220646c
20203a65
6d692820
6d656c70
61746e65
6e6f6974
7065642d
65646e65
2c29746e
6d617320
73612065
6f626120
000a6576
5f746e49
6f4c5f31
20203a63
20202020
20202020
0a642520
00000000
5f746e49
6f4c5f32
20203a63
20202020
20202020
0a642520
00000000
5f746e49
6f4c5f33
20203a63
20202020
20202020
0a642520
00000000
6d756e45
636f4c5f
2020203a
20202020
20202020
0a642520
00000000
5f727453
6f4c5f31
20203a63
20202020
20202020
0a732520
00000000
20202020
20202020
756f6873
6220646c
20203a65
52484420
4f545359
5020454e
52474f52
202c4d41
54532731
52545320
0a474e49
00000000
5f727453
6f4c5f32
20203a63
20202020
20202020
0a732520
00000000
20202020
20202020
756f6873
6220646c
20203a65
52484420
4f545359
5020454e
52474f52
202c4d41
444e2732
52545320
0a474e49
00000000
