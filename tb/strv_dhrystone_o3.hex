00008137
12977111
82930000
3317e422
03130000
f6636463
a0230062
02910002
226dbfdd
6705a001
e4872503
800007b7
0ff00693
0505c3d4
e4a72423
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
fff60813
4799c241
00158713
0707f163
00b567b3
87138b8d
ebb10015
40e507b3
0037b793
7893e7a9
87aaffc6
011586b3
05914198
ae230791
9be3fee7
07b3feb6
08330115
0f634118
c7030316
80230006
096300e7
c6030208
47050016
00c780a3
02e80263
0026c703
00e78123
06b38082
87aa00c5
fff74603
07050785
fec78fa3
fed79ae3
08138082
ca45fff6
40a006b3
f7134895
f7930ff5
f1630036
85aa0b08
0023cb85
8a8900e5
00150593
ffe60813
00a3c285
468d00e5
00250593
ffd60813
00d79863
00350593
00e50123
ffc60813
00871693
13138e1d
8ed90107
01871893
0066e6b3
731397aa
e6b3ffc6
88b30116
c3940067
9ee30791
0063ff17
87b30466
08330065
80234068
086300e7
80a30208
468500e7
02d80363
00e78123
0e634689
81a300d8
468d00e7
00d80963
00e78223
04634691
82a300d8
808200e7
b7e187aa
45811141
c6064501
678524e5
e707a783
6ea16f21
f0ff2023
a7836785
6e21e6c7
a2236321
6785f0fe
e697c783
682168a1
f0fe2423
c7836785
6521e687
26236685
6785f0f3
e9c7a783
af8365a1
a823e746
6785f0f8
5a07a703
a7836785
2a23e787
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
a0319387
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
e6e7a823
75138082
f5930ff5
04630ff5
450100b5
67858082
e6a784a3
80824505
c4221141
c606c226
84ae842a
0034c583
00244503
f97d3fc9
852285a6
47813305
00a05763
47296785
e6e7a823
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
0793e707
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
e697c703
04100793
00f70363
411c8082
27036705
07a5e707
c11c8f99
67858082
e787a603
4218c609
a603c118
6785e787
e707a583
45290631
1141bd79
c04ac422
69054100
e7892583
0613c226
84aa0300
c6068522
409839a1
c4dc4795
c018c45c
3f758522
e78d405c
47994488
0593c45c
37310084
e7892783
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
b1290141
c7836785
6705e697
e6c72683
fbf78793
0017b793
26238fd5
6785e6f7
04200713
e6e78423
67858082
04100713
e6e784a3
a6236785
8082e607
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
aa23c398
4709e6e6
6585c798
02800713
c7d86685
01078513
0007a223
93858593
e6f6ac23
65853e1d
95c58593
f8040513
6785362d
85136705
071397c7
47a9f447
64f72e23
65853d69
85936505
05139805
35719905
a7836785
8363e647
65053e07
9b450513
46373dad
6585000f
06136505
85932406
0513a105
3595a1c5
85136785
3db197c7
a0236785
0793e607
26231f40
6485f6f4
6a856a05
f6c42983
05136705
85cea307
45053d2d
3c413c45
2e236705
5363e4a7
8c930d30
49050019
4b9d4c05
04000b13
3dc93ded
85936785
0513a547
3461fa04
fa040593
f8040513
f7842e23
37933b81
67050015
f7840613
4509458d
e6f72623
f7742c23
268339c9
6785f784
f4478593
460d6785
e7c78513
2a23478d
31c1f6f4
a5036785
3d11e787
e684c783
30fb7063
04100d13
0593498d
856a0430
270331dd
0693f7c4
0c63001d
c7032ae5
fd13e684
72e30ff6
9793ffa7
99be0019
f7842d03
f7440513
cdb30905
2a2303a9
3b41f7b4
f72c90e3
41a989b3
00399713
41370733
41b70933
87aa32c9
45016705
2c2389ba
3ac9e4f7
27036705
a783e5c7
8f99e589
2a236705
5563e4f7
478528f0
20236705
6505e6f7
a9450513
6d053b0d
97cd0513
2583332d
6505e70a
acc50513
3b316985
ae898513
3b114595
a5836785
6505e6c7
b0450513
85133319
4585ae89
678539fd
e697c583
05136505
39c5b205
05136a05
0593b3ca
31d50410
e684c583
05136505
39e1b585
b3ca0513
04200593
678531f9
e7c78793
6505538c
b7450513
8513397d
459dae89
6785395d
f4478793
65c7a583
05136505
3155b905
05136505
3971bac5
05136505
3951bd85
a7836485
6c05e784
be4c0513
6b85438c
31416b05
05136505
39a5c005
e784a783
c34b8513
43cc6a85
6c856a05
8513319d
4581ae89
a78339b9
0513e784
478cc50b
85133989
4589ae89
a78331a9
8513e784
47ccc6ca
8513393d
45c5ae89
a583391d
0513e784
6485c88a
312505c1
ca448513
6505310d
cdc50513
a7833929
0513e74c
438cbe4c
65053139
cf050513
a7833119
8513e74c
43ccc34b
85133eed
4581ae89
a7833ecd
0513e74c
478cc50b
851336dd
4585ae89
a7833ef9
8513e74c
47ccc6ca
85133ec9
45c9ae89
a58336e9
0513e74c
05c1c88a
85133e7d
3e65ca44
f7442583
05136505
3675d305
ae898513
36554595
85ca6505
d4c50513
85133e69
45b5ae89
25833e49
6505f784
d6850513
85133659
459dae89
25833ebd
6505f7c4
d8450513
85133e8d
4585ae89
650536ad
f8040593
da050513
65053eb9
dbc50513
65053e99
fa040593
df450513
650536a9
e1050513
05133689
3e3597cd
f6c42603
000f47b7
24078793
02f60733
a6836785
4501e547
02c6c7b3
02d74733
a8236685
6785e4f6
e4e7a623
f6040113
446a40fa
494a44da
4a2a49ba
4b0a4a9a
5c665bf6
5d465cd6
610d5db6
05938082
4501f7c4
a7bff0ef
a74a8593
fa040513
f56ff0ef
e684c703
001d0793
e72a2823
0ff7fd13
78e389ca
b335d1a7
b33d49a5
f6c42683
a7036785
9793e607
97b60026
26230786
0fe3f6f4
b3a5c407
05136505
f0ef9e05
b931a99f
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
